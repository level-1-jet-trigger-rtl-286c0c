// tb_link_sync: runs the link synchronisation of two TRU links against the
// transmitter/eye model. Link 0 has eyes [20,35] and [10,41]; link 1 has an
// eye [60,63] reaching the last tap on pair 0 and no eye at all on pair 1.
// Checks the applied taps (centre of the eye), framing (chunk equal to the
// training chunk after lock, for many chunks), the error for a pair with no
// eye, and that the scan took the expected number of chunks.
module tb_link_sync;
  import stu_pkg::*;
  logic clk_bit = 0, rst = 1, start = 0;
  always #1 clk_bit = ~clk_bit;
  int checks = 0, failures = 0;

  logic [TAP_W-1:0] tap [2][2];
  logic [1:0]       din [2];
  logic [5:0]       chunk [2][2];
  logic             cv [2][2], bs [2][2], lk [2][2], er [2][2];
  logic [5:0]       zlo [2][2], zhi [2][2];

  tru_link_model #(.EYE_LO0(20), .EYE_HI0(35), .EYE_LO1(10), .EYE_HI1(41), .PHASE(2), .SKEW(1))
    m0 (.clk_bit, .tap(tap[0]), .dout(din[0]));
  tru_link_model #(.EYE_LO0(60), .EYE_HI0(63), .EYE_LO1(63), .EYE_HI1(0), .PHASE(4), .SKEW(3))
    m1 (.clk_bit, .tap(tap[1]), .dout(din[1]));

  for (genvar k = 0; k < 2; k++) begin : g_k
    for (genvar l = 0; l < 2; l++) begin : g_l
      lane_deser ud (.clk_bit, .rst, .din(din[k][l]), .bitslip(bs[k][l]),
                     .chunk(chunk[k][l]), .chunk_valid(cv[k][l]));
      link_sync  us (.clk_bit, .rst, .start, .chunk(chunk[k][l]), .chunk_valid(cv[k][l]),
                     .tap(tap[k][l]), .bitslip(bs[k][l]), .locked(lk[k][l]), .error(er[k][l]),
                     .zone_lo(zlo[k][l]), .zone_hi(zhi[k][l]));
    end
  end

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #200000;
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int t0, t_lock;
  initial begin
    repeat (5) @(posedge clk_bit);
    rst = 0;
    repeat (5) @(posedge clk_bit);
    start = 1; @(posedge clk_bit); start = 0;
    t0 = $time;
    wait ((lk[0][0] || er[0][0]) && (lk[0][1] || er[0][1]) && (lk[1][0] || er[1][0]) && (lk[1][1] || er[1][1]));
    t_lock = $time;
    check(lk[0][0] && tap[0][0] == 27, $sformatf("link0 pair0 tap %0d locked %0d", tap[0][0], lk[0][0]));
    check(lk[0][1] && tap[0][1] == 25, $sformatf("link0 pair1 tap %0d locked %0d", tap[0][1], lk[0][1]));
    check(zlo[0][0] == 20 && zhi[0][0] == 35, "link0 pair0 zone");
    check(zlo[0][1] == 10 && zhi[0][1] == 41, "link0 pair1 zone");
    check(lk[1][0] && tap[1][0] == 61, $sformatf("link1 pair0 tap %0d", tap[1][0]));
    check(er[1][1] && !lk[1][1], "link1 pair1 must report error");
    // scan of 64 taps, (2 settle + 16 check) chunks each, 6 bit clocks per chunk
    // (2 time units per bit clock): at least 64*18*6*2 time units.
    check((t_lock - t0) >= 64 * 18 * 6 * 2, $sformatf("scan too short: %0d", t_lock - t0));
    check((t_lock - t0) <= 64 * 18 * 6 * 2 + 400, $sformatf("scan too long: %0d", t_lock - t0));
    // framing: the next 50 chunks of the locked pairs are the training chunk
    for (int n = 0; n < 50; n++) begin
      @(posedge clk_bit iff cv[0][0]); #0.1;
      check(chunk[0][0] == TRAIN_CHUNK, $sformatf("pair0 chunk %b", chunk[0][0]));
      check(chunk[0][1] == TRAIN_CHUNK, $sformatf("pair1 chunk %b", chunk[0][1]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
