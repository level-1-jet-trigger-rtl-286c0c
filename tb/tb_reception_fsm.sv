// tb_reception_fsm: feeds chunk pairs (with pair 1 lagging pair 0 by a few
// clocks) carrying idle words, a start marker and 96 values, once unmirrored
// and once mirrored, and checks every RAM write address and value, the
// primitive-data stream, and the frame_done/frame_toggle outputs. Words sent
// while the link is not enabled must be ignored.
module tb_reception_fsm;
  import stu_pkg::*;
  logic clk_bit = 0, rst = 1, enable = 0, mirror = 0;
  always #1 clk_bit = ~clk_bit;
  logic [5:0] chunk0 = 0, chunk1 = 0;
  logic valid0 = 0, valid1 = 0;
  logic we, prim_valid, frame_done, frame_toggle;
  logic [6:0] waddr, prim_idx;
  logic [11:0] wdata, prim_data;
  int checks = 0, failures = 0;

  reception_fsm dut (.*);

  logic [11:0] vals [96];
  logic [11:0] ram [96];
  int nwrites = 0, ndone = 0;

  always @(posedge clk_bit) if (!rst && we) begin
    ram[waddr] <= wdata;
    nwrites++;
  end
  always @(posedge clk_bit) if (!rst && frame_done) ndone++;

  task automatic send_word(input logic [11:0] w);
    // pair 0 first, pair 1 two clocks later, then a gap: 6 clocks per word
    @(negedge clk_bit); chunk0 = w[5:0]; valid0 = 1;
    @(negedge clk_bit); valid0 = 0;
    @(negedge clk_bit); chunk1 = w[11:6]; valid1 = 1;
    @(negedge clk_bit); valid1 = 0;
    repeat (2) @(negedge clk_bit);
  endtask

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic tog0;
    repeat (3) @(negedge clk_bit); rst = 0;
    // not enabled: a whole frame is ignored
    send_word(START_WORD);
    for (int i = 0; i < 96; i++) send_word(12'(i));
    check(nwrites == 0, "writes while disabled");
    enable = 1;
    for (int pass = 0; pass < 2; pass++) begin
      mirror = (pass == 1);
      for (int i = 0; i < 96; i++) vals[i] = 12'($urandom);
      for (int i = 0; i < 96; i++) ram[i] = 'x;
      nwrites = 0; ndone = 0; tog0 = frame_toggle;
      repeat (3) send_word(IDLE_WORD);
      send_word(START_WORD);
      for (int i = 0; i < 96; i++) send_word(vals[i]);
      repeat (3) send_word(IDLE_WORD);
      check(nwrites == 96, $sformatf("pass %0d writes %0d", pass, nwrites));
      check(ndone == 1, "one frame_done");
      check(frame_toggle != tog0, "toggle flipped");
      for (int i = 0; i < 96; i++)
        check(ram[mirror ? 95 - i : i] == vals[i], $sformatf("pass %0d fastOR %0d", pass, i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // primitive data stream: index and value in sending order
  int pcount = 0;
  always @(posedge clk_bit) if (!rst && prim_valid && enable) begin
    checks++;
    if (prim_data !== vals[prim_idx] || prim_idx != 7'(pcount % 96)) failures++;
    pcount++;
  end
endmodule
