// tb_readout_buffer: self-checking testbench of the multievent readout buffer.
//
// Drives events into the buffer the way the top does: a capture pulse, then
// 96 rows of region RAM outputs (row a on the (a+2)-th clock after the
// pulse), then a commit with thresholds, L1 flags and hit maps that are
// different for every event. A scoreboard keeps the expected contents of each
// buffered event. The test fills the buffer to its depth (checks `full` and
// `n_events`), rejects the oldest event, accepts the others in order, and
// compares every word of each readout with the expected event format,
// including `ro_last` on the trailer. One readout runs with `ro_ready` always
// high and must take exactly one clock per word (3179 clocks); the others run
// with random backpressure. Decisions given while an event is being sent must
// be ignored. A watchdog ends the run if it hangs.
module tb_readout_buffer;
  import stu_pkg::*;

  localparam int NEV    = 4;
  localparam int NWORDS = 3179;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic                  capture_start = 0, commit = 0;
  logic [FASTOR_W-1:0]   ts_in [N_TRU];
  logic [THR_W-1:0]      thr_photon = '0, thr_jet = '0;
  logic                  l1_gamma = 0, l1_jet = 0;
  logic [N_PH_PATCH-1:0] ph_hit_map  [N_TRU][8];
  logic [JET_PATCH-1:0]  jet_hit_map [2*JET_PROCS];
  logic                  full;
  logic [$clog2(NEV+1)-1:0] n_events;
  logic                  l2_accept = 0, l2_reject = 0, l2_ready;
  logic                  ro_valid, ro_last, ro_ready = 1;
  logic [31:0]           ro_data;

  readout_buffer dut (.*);

  int checks = 0, failures = 0;

  // every value of event e is a function of e
  function automatic logic [11:0] tsv(int e, int t, int a);
    return 12'((e * 977 + t * 131 + a * 7 + 3) % 4096);
  endfunction
  function automatic logic [11:0] phm(int e, int t, int j);
    return 12'((e * 1103 + t * 37 + j * 5) % 4096);
  endfunction
  function automatic logic [7:0] jtm(int e, int i);
    return 8'((e * 29 + i * 11) % 256);
  endfunction

  // expected word w of event e (stored in slot s, event number e)
  function automatic logic [31:0] exp_word(int e, int s, int w);
    logic [3071:0] ph;
    logic [191:0]  jt;
    ph = '0; jt = '0;
    for (int t = 0; t < N_TRU; t++)
      for (int j = 0; j < 8; j++) ph[(t*8+j)*12 +: 12] = phm(e, t, j);
    for (int i = 0; i < 2*JET_PROCS; i++) jt[i*8 +: 8] = jtm(e, i);
    if (w == 0) return {8'hA5, 8'(s), 16'(e)};
    if (w == 1) return 32'(18'(e * 1000 + 17));
    if (w == 2) return 32'(18'(e * 2000 + 5));
    if (w == 3) return {30'b0, 1'(e % 3 == 0), 1'(e % 2)};
    if (w < 100) return ph[(w - 4)*32 +: 32];
    if (w < 106) return jt[(w - 100)*32 +: 32];
    if (w < 3178) begin
      automatic int n = w - 106;
      automatic int t = n / 96, a = n % 96;
      return {3'b0, 5'(t), 7'(a), 5'b0, tsv(e, t, a)};
    end
    return {8'h5A, 8'h00, 16'(e)};
  endfunction

  task automatic put_event(int e);
    @(negedge clk) capture_start = 1;
    @(negedge clk) capture_start = 0;
    for (int a = 0; a < 96; a++) begin
      @(negedge clk);
      for (int t = 0; t < N_TRU; t++) ts_in[t] = tsv(e, t, a);
    end
    @(negedge clk);
    for (int t = 0; t < N_TRU; t++) begin
      ts_in[t] = 12'hFFF;   // after the capture window: must not be stored
      for (int j = 0; j < 8; j++) ph_hit_map[t][j] = phm(e, t, j);
    end
    for (int i = 0; i < 2*JET_PROCS; i++) jet_hit_map[i] = jtm(e, i);
    thr_photon = 18'(e * 1000 + 17);
    thr_jet    = 18'(e * 2000 + 5);
    l1_gamma   = 1'(e % 2);
    l1_jet     = 1'(e % 3 == 0);
    commit     = 1;
    @(negedge clk) commit = 0;
    for (int t = 0; t < N_TRU; t++)
      for (int j = 0; j < 8; j++) ph_hit_map[t][j] = '0;
  endtask

  task automatic read_event(int e, int s, bit backpressure);
    int w = 0, ncyc = 0;
    @(negedge clk) l2_accept = 1;
    @(negedge clk) l2_accept = 0;
    checks++;
    if (!ro_valid || l2_ready) begin
      failures++; $display("ev %0d: readout did not start", e);
    end
    // a decision during the readout is ignored
    l2_reject = 1;
    while (w < NWORDS) begin
      if (backpressure) ro_ready = 1'($urandom_range(0, 2) != 0);
      #1;
      if (ro_valid && ro_ready) begin
        automatic logic [31:0] x = exp_word(e, s, w);
        checks++;
        if (ro_data !== x || ro_last !== (w == NWORDS - 1)) begin
          failures++;
          if (failures < 10)
            $display("ev %0d word %0d: %h last %0b, expected %h", e, w, ro_data, ro_last, x);
        end
        w++;
      end
      @(posedge clk); ncyc++;
      @(negedge clk) l2_reject = 0;
    end
    ro_ready = 1;
    checks++;
    if (!backpressure && ncyc != NWORDS) begin
      failures++; $display("ev %0d: readout took %0d clocks, expected %0d", e, ncyc, NWORDS);
    end
    #1;
    checks++;
    if (ro_valid || !l2_ready) begin
      failures++; $display("ev %0d: still sending after the trailer", e);
    end
  endtask

  task automatic expect_count(int n, string where);
    #1;
    checks++;
    if (n_events != n || full != (n == NEV)) begin
      failures++;
      $display("%s: n_events %0d full %0b, expected %0d", where, n_events, full, n);
    end
  endtask

  initial begin
    for (int t = 0; t < N_TRU; t++) begin
      ts_in[t] = '0;
      for (int j = 0; j < 8; j++) ph_hit_map[t][j] = '0;
    end
    for (int i = 0; i < 2*JET_PROCS; i++) jet_hit_map[i] = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    expect_count(0, "after reset");

    // fill all slots with events 0..3
    for (int e = 0; e < NEV; e++) begin
      put_event(e);
      expect_count(e + 1, "after commit");
    end
    // a further commit while full is refused
    @(negedge clk) commit = 1;
    @(negedge clk) commit = 0;
    expect_count(NEV, "commit while full");

    // reject event 0 (slot 0), then accept event 1 (slot 1) at full rate
    @(negedge clk) l2_reject = 1;
    @(negedge clk) l2_reject = 0;
    expect_count(NEV - 1, "after reject");
    read_event(1, 1, 0);
    expect_count(NEV - 2, "after readout");

    // two more events go into slots 0 and 1 (wrap-around)
    put_event(4);
    put_event(5);
    expect_count(NEV, "after wrap");

    // read the rest in order with backpressure
    read_event(2, 2, 1);
    read_event(3, 3, 1);
    read_event(4, 0, 1);
    read_event(5, 1, 1);
    expect_count(0, "at end");

    // an accept with nothing buffered does nothing
    @(negedge clk) l2_accept = 1;
    @(negedge clk) l2_accept = 0;
    #1;
    checks++;
    if (ro_valid) begin failures++; $display("readout started with an empty buffer"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog: testbench did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
