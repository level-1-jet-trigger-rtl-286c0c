// tb_stu_top: end-to-end test of the Summary Trigger Unit at full size
// (32 TRU links, default parameters).
//
// Each TRU link is a transmitter/eye model with its own eye, phase and pair
// skew. The test synchronises all links, then runs five events. For each
// event a fastOR map of the whole calorimeter (48 eta x 64 phi) is built
// here, cut into the 32 TRU frames (A-side frames reversed, as an A-side TRU
// would send them), and the V0 charges are sent. The expected thresholds,
// all 2x2 photon patch sums (2961 valid positions) and all 165 jet patch sums
// are computed here directly from the map in global coordinates, and every
// bit of the photon and jet hit maps, l1_gamma and l1_jet are compared.
// Event 1 has hot clusters straddling the C/A boundary, a phi region
// boundary and both at once; event 2 has a higher V0 (higher thresholds) and
// a jet-size deposit; event 3 is quiet. Global L0 candidates are pulsed too.
// The mechanisms are counted and each must occur: link lock with tap
// centring on every pair, mirrored frames, patch hits across each kind of
// region boundary, the threshold change with V0, both trigger outcomes, the
// jet trigger, the edge masking and the global L0. Events 4 and 5 fill the
// 4-event readout buffer: event 5 must wait until an L2 reject frees a
// slot. Then events are accepted or rejected in order and every word read
// out (thresholds, flags, hit maps, all 3072 time sums) is compared with the
// values of its event, partly with the readout stream held back.
module tb_stu_top;
  import stu_pkg::*;
  logic clk_bit = 0, rst_bit = 1, clk = 0, rst = 1;
  always #1 clk_bit = ~clk_bit;   // bit clock
  always #2 clk = ~clk;           // processing clock
  int checks = 0, failures = 0;

  logic [1:0]            link_din    [N_TRU];
  logic                  sync_start = 0;
  logic [TAP_W-1:0]      link_tap    [N_TRU][2];
  logic [N_TRU-1:0]      link_locked, link_error, prim_valid;
  logic [6:0]            prim_idx    [N_TRU];
  logic [11:0]           prim_data   [N_TRU];
  logic [N_TRU-1:0]      tru_enable = '1;
  logic [N_TRU-1:0]      l0_local = '0, l0_pattern;
  logic                  l0_global;
  logic                  v0_valid = 0;
  logic [15:0]           v0a = 0, v0c = 0;
  logic signed [31:0]    ph_coef_a, ph_coef_b, ph_coef_c, jet_coef_a, jet_coef_b, jet_coef_c;
  logic [THR_W-1:0]      thr_photon, thr_jet;
  logic                  l1_busy, l1_valid, l1_gamma, l1_jet;
  logic [N_PH_PATCH-1:0] ph_hit_map  [N_TRU][8];
  logic [JET_PATCH-1:0]  jet_hit_map [2*JET_PROCS];
  logic                  l2_accept = 0, l2_reject = 0, l2_ready, ro_full;
  logic [2:0]            ro_n_events;
  logic                  ro_valid, ro_last, ro_ready = 1;
  logic [31:0]           ro_data;

  stu_top dut (.*);

  // ---- TRU link models ----
  logic [11:0] raw [N_TRU][96];
  event        go;
  for (genvar t = 0; t < N_TRU; t++) begin : g_tru
    localparam int unsigned LO0 = 2 + (t * 7) % 25;
    localparam int unsigned HI0 = LO0 + 10 + (t % 5) * 4;
    localparam int unsigned LO1 = 30 - (t * 3) % 20;
    localparam int unsigned HI1 = LO1 + 8 + (t % 7) * 3;
    tru_link_model #(.EYE_LO0(LO0), .EYE_HI0(HI0), .EYE_LO1(LO1), .EYE_HI1(HI1),
                     .PHASE(t % 6), .SKEW(t % 4))
      m (.clk_bit, .tap(link_tap[t]), .dout(link_din[t]));
    always @(go) m.send_frame(raw[t]);
    initial begin
      wait (!rst);
      wait (link_locked[t] || link_error[t]);
      checks++;
      if (!(link_locked[t] && link_tap[t][0] == TAP_W'((LO0 + HI0) / 2)
                           && link_tap[t][1] == TAP_W'((LO1 + HI1) / 2))) begin
        failures++;
        $display("link %0d: locked %0d taps %0d %0d", t, link_locked[t], link_tap[t][0], link_tap[t][1]);
      end else n_lock++;
    end
  end

  // ---- global map and reference ----
  int G [48][64];
  int n_lock = 0, n_mirror = 0, n_hit_ca = 0, n_hit_phi = 0, n_hit_diag = 0;
  int n_thr_change = 0;
  logic [THR_W-1:0] prev_thr;
  int n_gamma = 0, n_nogamma = 0, n_jet = 0, n_edge_masked = 0, n_l0 = 0, n_valid_patches;
  longint thr_ph_exp, thr_jet_exp;

  function automatic longint poly(longint a, longint b, longint c, longint v);
    longint p = (a * v * v + b * v + c) >>> 8;
    if (p < 0) p = 0;
    if (p > 262143) p = 262143;
    return p;
  endfunction

  task automatic build_frames();
    for (int t = 0; t < N_TRU; t++) begin
      automatic int s = t / 16, ph = t % 16;
      automatic int stored [96];
      for (int a = 0; a < 96; a++) stored[a] = G[24*s + a/4][4*ph + a%4];
      for (int n = 0; n < 96; n++) raw[t][n] = 12'(s ? stored[95 - n] : stored[n]);
      if (s) n_mirror++;
    end
  endtask

  task automatic check_event(input int ev);
    automatic bit any_g = 0, any_j = 0;
    automatic int nvalid = 0;
    checks++;
    if (thr_photon != 18'(thr_ph_exp) || thr_jet != 18'(thr_jet_exp)) begin
      failures++; $display("ev %0d thresholds %0d %0d exp %0d %0d", ev, thr_photon, thr_jet, thr_ph_exp, thr_jet_exp);
    end
    for (int t = 0; t < N_TRU; t++)
      for (int j = 0; j < 8; j++)
        for (int k = 0; k < 12; k++) begin
          automatic int s = t / 16, ph = t % 16, i = j % 4;
          automatic int c0 = (j >= 4) ? 2*k + 1 : 2*k;
          automatic int e = 24*s + c0, f = 4*ph + i;
          automatic bit valid = (e + 1 < 48) && (f + 1 < 64);
          automatic bit exp_hit = 0;
          if (valid) begin
            automatic int sum = G[e][f] + G[e+1][f] + G[e][f+1] + G[e+1][f+1];
            exp_hit = (sum > thr_photon);
            nvalid++;
            if (exp_hit) begin
              any_g = 1;
              if (e == 23) n_hit_ca++;
              if (f % 4 == 3) n_hit_phi++;
              if (e == 23 && f % 4 == 3) n_hit_diag++;
            end
          end else if (G[e % 48][f % 64] > 0) n_edge_masked++;
          checks++;
          if (ph_hit_map[t][j][k] != exp_hit) begin
            failures++;
            if (failures < 20) $display("ev %0d photon t=%0d j=%0d k=%0d got %0d exp %0d", ev, t, j, k, ph_hit_map[t][j][k], exp_hit);
          end
        end
    n_valid_patches = nvalid;
    for (int p = 0; p < 22; p++)
      for (int k = 0; k < 8; k++) begin
        automatic int i = p % 11;
        automatic int jc = (p < 11) ? 2*k : 2*k + 1;
        automatic bit valid = (jc + 1 < 16);
        automatic bit exp_hit = 0;
        if (valid) begin
          automatic int sum = 0;
          for (int e = 4*i; e < 4*i + 8; e++) for (int f = 4*jc; f < 4*jc + 8; f++) sum += G[e][f];
          exp_hit = (sum > thr_jet);
          if (exp_hit) any_j = 1;
        end
        checks++;
        if (jet_hit_map[p][k] != exp_hit) begin
          failures++;
          if (failures < 20) $display("ev %0d jet p=%0d k=%0d got %0d exp %0d", ev, p, k, jet_hit_map[p][k], exp_hit);
        end
      end
    checks++;
    if (l1_gamma != any_g || l1_jet != any_j) begin
      failures++; $display("ev %0d l1_gamma %0d/%0d l1_jet %0d/%0d", ev, l1_gamma, any_g, l1_jet, any_j);
    end
    if (ev > 1 && thr_photon != prev_thr) n_thr_change++;
    prev_thr = thr_photon;
    if (l1_gamma) n_gamma++; else n_nogamma++;
    if (l1_jet) n_jet++;
  endtask

  // ---- per-event snapshot for the readout check ----
  int                    GS   [6][48][64];
  logic [N_PH_PATCH-1:0] PHS  [6][N_TRU][8];
  logic [JET_PATCH-1:0]  JS   [6][2*JET_PROCS];
  logic [THR_W-1:0]      TPS  [6], TJS [6];
  logic [1:0]            FS   [6];
  int n_stall = 0, n_reject = 0, n_readout = 0, n_ro_wait = 0;

  task automatic snapshot(int ev);
    for (int e = 0; e < 48; e++) for (int f = 0; f < 64; f++) GS[ev][e][f] = G[e][f];
    for (int t = 0; t < N_TRU; t++) for (int j = 0; j < 8; j++) PHS[ev][t][j] = ph_hit_map[t][j];
    for (int i = 0; i < 2*JET_PROCS; i++) JS[ev][i] = jet_hit_map[i];
    TPS[ev] = thr_photon; TJS[ev] = thr_jet; FS[ev] = {l1_jet, l1_gamma};
  endtask

  function automatic logic [31:0] ro_word(int ev, int slot, int w);
    logic [3071:0] ph = '0;
    logic [191:0]  jt = '0;
    for (int t = 0; t < N_TRU; t++) for (int j = 0; j < 8; j++) ph[(t*8+j)*12 +: 12] = PHS[ev][t][j];
    for (int i = 0; i < 2*JET_PROCS; i++) jt[i*8 +: 8] = JS[ev][i];
    if (w == 0) return {8'hA5, 8'(slot), 16'(ev - 1)};
    if (w == 1) return 32'(TPS[ev]);
    if (w == 2) return 32'(TJS[ev]);
    if (w == 3) return {30'b0, FS[ev]};
    if (w < 100) return ph[(w - 4)*32 +: 32];
    if (w < 106) return jt[(w - 100)*32 +: 32];
    if (w < 3178) begin
      automatic int n = w - 106, t = n / 96, a = n % 96;
      automatic int sd = t / 16, ph_r = t % 16;
      return {3'b0, 5'(t), 7'(a), 5'b0, 12'(GS[ev][24*sd + a/4][4*ph_r + a%4])};
    end
    return {8'h5A, 8'h00, 16'(ev - 1)};
  endfunction

  // accept the oldest buffered event and compare every word sent
  task automatic readout(int ev, int slot, bit backpressure);
    automatic int w = 0, bad = 0;
    @(negedge clk) l2_accept = 1;
    @(negedge clk) l2_accept = 0;
    while (w < 3179) begin
      if (backpressure) ro_ready = 1'($urandom_range(0, 3) != 0);
      #0.5;
      if (ro_valid && !ro_ready) n_ro_wait++;
      if (ro_valid && ro_ready) begin
        checks++;
        if (ro_data !== ro_word(ev, slot, w) || ro_last !== (w == 3178)) begin
          failures++; bad++;
          if (bad < 5) $display("readout ev %0d word %0d: %h exp %h", ev, w, ro_data, ro_word(ev, slot, w));
        end
        w++;
      end
      @(negedge clk);
    end
    ro_ready = 1;
    n_readout++;
  endtask

  task automatic l2_reject_pulse();
    @(negedge clk) l2_reject = 1;
    @(negedge clk) l2_reject = 0;
    n_reject++;
  endtask

  task automatic cluster(int e, int f, int v);
    G[e][f] = v; G[e+1][f] = v; G[e][f+1] = v; G[e+1][f+1] = v;
  endtask

  int t_start_proc, t_l1, ncyc = 0;
  logic busy_q = 0;
  always @(posedge clk) begin
    ncyc++;
    if (l1_busy && !busy_q) t_start_proc = ncyc;
    busy_q <= l1_busy;
    if (l1_valid) t_l1 = ncyc;
    if (l0_global) n_l0++;
  end

  initial begin
    #2000000;
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ph_coef_a = 0;       ph_coef_b = 32'sd256;  ph_coef_c = 32'sd2000 <<< 8;   // thr = V0 + 2000
    jet_coef_a = 32'sd1; jet_coef_b = 32'sd0;   jet_coef_c = 32'sd40000 <<< 8; // thr = V0^2/256 + 40000
    repeat (4) @(posedge clk); rst_bit = 0; rst = 0;
    @(negedge clk_bit); sync_start = 1; @(negedge clk_bit); sync_start = 0;
    wait (&(link_locked | link_error));
    repeat (20) @(posedge clk_bit);

    for (int ev = 1; ev <= 5; ev++) begin
      for (int e = 0; e < 48; e++) for (int f = 0; f < 64; f++)
        G[e][f] = (ev == 3) ? 0 : $urandom % 200;
      if (ev == 1) begin
        cluster(23, 10, 1500);   // across the C/A boundary
        cluster(5, 27, 1500);    // across a phi region boundary (rows 3 | 0)
        cluster(23, 43, 1500);   // across both
        cluster(47, 63, 4000);   // single corner tower block: only edge-masked patches
        G[47][63] = 4000; G[46][62] = 0; G[47][62] = 0; G[46][63] = 0;
      end
      if (ev == 2) begin
        for (int e = 16; e < 24; e++) for (int f = 32; f < 40; f++) G[e][f] = 3000;  // jet-size deposit
        cluster(30, 6, 2000);
      end
      build_frames();
      v0a = (ev == 2) ? 16'd3000 : 16'd500;
      v0c = (ev == 2) ? 16'd2000 : 16'd300;
      thr_ph_exp  = poly(ph_coef_a, ph_coef_b, ph_coef_c, v0a + v0c);
      thr_jet_exp = poly(jet_coef_a, jet_coef_b, jet_coef_c, v0a + v0c);
      @(negedge clk); v0_valid = 1; @(negedge clk); v0_valid = 0;
      // a local L0 on one TRU
      @(negedge clk); l0_local[ev * 5] = 1; @(negedge clk); l0_local = '0;
      @(negedge clk_bit); ->go;
      if (ev == 5) begin
        // four events are buffered: the fifth must wait for a free slot
        repeat (600) @(posedge clk);
        checks++;
        if (l1_busy || !ro_full || ro_n_events != 4) begin
          failures++; $display("ev 5 started with the readout buffer full");
        end else n_stall++;
        l2_reject_pulse();   // drops event 1
      end
      @(posedge l1_valid); @(posedge clk); #0.5;
      check_event(ev);
      snapshot(ev);
      checks++;
      if (t_l1 - t_start_proc != 102 + 194 + 2) begin
        failures++; $display("ev %0d L1 latency %0d clocks", ev, t_l1 - t_start_proc);
      end
      repeat (10) @(posedge clk);
    end

    // L2 decisions: events 2, 3 accepted, 4 rejected, 5 accepted
    readout(2, 1, 0);
    readout(3, 2, 1);
    l2_reject_pulse();
    readout(5, 0, 1);
    #0.5;
    checks++;
    if (ro_n_events != 0 || ro_valid) begin failures++; $display("readout buffer not empty at the end"); end

    // mechanisms
    begin
      automatic int m [string];
      m["link lock + tap centring (links)"] = n_lock;
      m["mirrored A-side frames"]          = n_mirror;
      m["hit across C/A boundary"]         = n_hit_ca;
      m["hit across phi region boundary"]  = n_hit_phi;
      m["hit across both (diagonal)"]      = n_hit_diag;
      m["threshold changed with V0"]       = n_thr_change;
      m["l1_gamma fired"]                  = n_gamma;
      m["l1_gamma quiet"]                  = n_nogamma;
      m["l1_jet fired"]                    = n_jet;
      m["edge patch masked"]               = n_edge_masked;
      m["global L0 fired"]                 = n_l0;
      m["event held: readout buffer full"] = n_stall;
      m["L2 reject drops an event"]        = n_reject;
      m["L2 accept: event read out"]       = n_readout;
      m["readout stalled by DDL"]          = n_ro_wait;
      foreach (m[k]) begin
        $display("mechanism %-34s : %0d", k, m[k]);
        checks++;
        if (m[k] == 0) begin failures++; $display("  never happened"); end
      end
      checks++;
      if (n_lock != N_TRU) failures++;
      checks++;
      if (n_valid_patches != 2961) begin failures++; $display("valid photon patches %0d", n_valid_patches); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
