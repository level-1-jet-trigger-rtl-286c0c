// tb_subregion_proc: streams 96 column-major fastOR values (with gaps in
// data_avail) and reads back the 6 subregion sums, each the sum of columns
// 4m..4m+3, all rows; checks the done pulse; repeats after clear.
module tb_subregion_proc;
  import stu_pkg::*;
  logic clk = 0, rst = 1, clear = 0, data_avail = 0, done;
  logic [11:0] din = 0;
  logic [2:0]  rd_addr = 0;
  logic [15:0] rd_data;
  always #1 clk = ~clk;
  int checks = 0, failures = 0, ndone = 0;
  subregion_proc dut (.*);
  always @(posedge clk) if (done) ndone++;
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic [11:0] v [96];
    int exp [6];
    repeat (3) @(negedge clk); rst = 0;
    for (int pass = 0; pass < 2; pass++) begin
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      ndone = 0;
      for (int i = 0; i < 96; i++) v[i] = (pass == 0) ? 12'hFFF : 12'($urandom);
      for (int m = 0; m < 6; m++) begin
        exp[m] = 0;
        for (int c = 4*m; c < 4*m + 4; c++) for (int r = 0; r < 4; r++) exp[m] += v[4*c + r];
      end
      for (int i = 0; i < 96; i++) begin
        data_avail = 1; din = v[i]; @(negedge clk); data_avail = 0;
        if (i % 7 == 3) @(negedge clk);
      end
      @(negedge clk);
      checks++; if (ndone != 1) begin failures++; $display("done count %0d", ndone); end
      for (int m = 0; m < 6; m++) begin
        rd_addr = 3'(m); @(negedge clk);
        checks++;
        if (rd_data != 16'(exp[m])) begin failures++; $display("sub %0d got %0d exp %0d", m, rd_data, exp[m]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
