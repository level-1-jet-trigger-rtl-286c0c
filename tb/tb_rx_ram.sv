// tb_rx_ram: writes random words on the write clock and reads them back on
// an unrelated read clock, checking the one-clock read latency.
module tb_rx_ram;
  logic wclk = 0, rclk = 0, we = 0;
  logic [6:0] waddr = 0, raddr = 0;
  logic [11:0] wdata = 0, rdata;
  int checks = 0, failures = 0;
  always #2 wclk = ~wclk;
  always #3 rclk = ~rclk;
  rx_ram dut (.*);
  logic [11:0] ref_mem [96];
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 96; i++) begin
      @(negedge wclk); we = 1; waddr = 7'(i); wdata = 12'($urandom); ref_mem[i] = wdata;
    end
    @(negedge wclk); we = 0;
    // overwrite a few
    for (int i = 0; i < 10; i++) begin
      @(negedge wclk); we = 1; waddr = 7'($urandom % 96); wdata = 12'($urandom); ref_mem[waddr] = wdata;
    end
    @(negedge wclk); we = 0;
    for (int n = 0; n < 300; n++) begin
      @(negedge rclk); raddr = 7'($urandom % 96);
      @(posedge rclk); #0.5;
      checks++;
      if (rdata !== ref_mem[raddr]) begin failures++; $display("addr %0d got %h exp %h", raddr, rdata, ref_mem[raddr]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
