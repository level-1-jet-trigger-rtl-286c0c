// stu_top: the Summary Trigger Unit (STU) of the calorimeter L1 trigger.
//
// The STU gathers the time-integrated fastOR sums of all 32 TRUs over their
// serial links and computes, for each event:
//   * the global L0, an OR of the 32 local L0 candidates (global_l0);
//   * the L1-gamma trigger: all 2x2-fastOR patches of the calorimeter,
//     including those straddling two TRU regions (32 region_proc, 8 patch
//     processors each, 2961 valid patches);
//   * the L1-jet trigger: all 2x2-subregion (16x16 fastOR) patches of the
//     12 x 16 subregion map (jet_proc, 165 patches);
//   * both thresholds from the V0 charges, A*V0^2 + B*V0 + C
//     (two threshold_calc).
// Region t = side*16 + phi, side 0 = C, side 1 = A (A-side links are
// mirrored on reception). A region's phi neighbour "R" is t+1, its eta
// neighbour "A" is t+16 (C side only), the diagonal one t+17. Patches that
// would reach past the calorimeter edge (O processors' last patch on the A
// side, E3/O3 of the last phi region) are masked out of the trigger.
//
// Sequencing (this design's choice; the paper only orders the steps): the
// thresholds must have been computed (v0_valid) and every enabled link must
// have delivered its frame; then all regions process in lock-step (102
// clocks), then the jet processor runs (194 clocks), and `l1_valid` pulses
// with `l1_gamma`/`l1_jet` and the hit maps (the triggering patch positions).
// The time sums, hit maps and thresholds of each event are kept in a 4-event
// readout buffer (readout_buffer); an event is sent out as 32-bit words on
// `l2_accept` or dropped on `l2_reject`. While the buffer is full no new
// event is started: the links keep their data and `l1_busy` stays low.
// Parts outside this RTL connect through ports: the per-pair input delays
// (`tap` out, delayed data in), the TTC and V0 link receivers (`v0_*`,
// `l2_*`), the DDL (`ro_*` stream, plus the raw `prim_*` reception stream)
// and the slow control (coefficients, enables).
// The hit-map bits of the edge-masked patches and of the missing eighth odd
// jet patch are constant 0.
module stu_top
  import stu_pkg::*;
(
  input  logic                        clk_bit,
  input  logic                        rst_bit,
  input  logic                        clk,
  input  logic                        rst,
  // TRU links
  input  logic [1:0]                  link_din    [N_TRU],
  input  logic                        sync_start,
  output logic [TAP_W-1:0]            link_tap    [N_TRU][2],
  output logic [N_TRU-1:0]            link_locked,
  output logic [N_TRU-1:0]            link_error,
  output logic [N_TRU-1:0]            prim_valid,
  output logic [$clog2(N_FASTOR)-1:0] prim_idx    [N_TRU],
  output logic [FASTOR_W-1:0]         prim_data   [N_TRU],
  input  logic [N_TRU-1:0]            tru_enable,
  // L0
  input  logic [N_TRU-1:0]            l0_local,
  output logic                        l0_global,
  output logic [N_TRU-1:0]            l0_pattern,
  // V0 and thresholds
  input  logic                        v0_valid,
  input  logic [V0_W-1:0]             v0a,
  input  logic [V0_W-1:0]             v0c,
  input  logic signed [COEF_W-1:0]    ph_coef_a, ph_coef_b, ph_coef_c,
  input  logic signed [COEF_W-1:0]    jet_coef_a, jet_coef_b, jet_coef_c,
  output logic [THR_W-1:0]            thr_photon,
  output logic [THR_W-1:0]            thr_jet,
  // L1 results
  output logic                        l1_busy,
  output logic                        l1_valid,
  output logic                        l1_gamma,
  output logic                        l1_jet,
  output logic [N_PH_PATCH-1:0]       ph_hit_map  [N_TRU][8],
  output logic [JET_PATCH-1:0]        jet_hit_map [2*JET_PROCS],
  // L2 decisions and event readout (towards the DDL)
  input  logic                        l2_accept,
  input  logic                        l2_reject,
  output logic                        l2_ready,
  output logic                        ro_full,
  output logic [2:0]                  ro_n_events,
  output logic                        ro_valid,
  output logic [31:0]                 ro_data,
  output logic                        ro_last,
  input  logic                        ro_ready
);

  // ---------------- global L0 ----------------
  global_l0 u_l0 (
    .clk, .rst, .l0_local, .tru_enable, .l0_global, .l0_pattern
  );

  // ---------------- thresholds ----------------
  logic thr_v_ph, thr_v_jet;

  threshold_calc u_thr_ph (
    .clk, .rst, .v0_valid, .v0a, .v0c,
    .coef_a(ph_coef_a), .coef_b(ph_coef_b), .coef_c(ph_coef_c),
    .thr(thr_photon), .thr_valid(thr_v_ph)
  );
  threshold_calc u_thr_jet (
    .clk, .rst, .v0_valid, .v0a, .v0c,
    .coef_a(jet_coef_a), .coef_b(jet_coef_b), .coef_c(jet_coef_c),
    .thr(thr_jet), .thr_valid(thr_v_jet)
  );

  // ---------------- regions ----------------
  logic [FASTOR_W-1:0]           data_ram   [N_TRU];
  logic [N_TRU-1:0]              rx_ready;
  logic                          start_processing;
  logic [N_TRU-1:0]              proc_done;
  logic [N_TRU-1:0]              sr_done;
  logic [$clog2(SR_PER_REG)-1:0] sr_rd_addr;
  logic [SR_W-1:0]               sr_data    [N_TRU];
  logic [N_PH_PATCH-1:0]         raw_map    [N_TRU][8];

  for (genvar t = 0; t < N_TRU; t++) begin : g_reg
    localparam int unsigned SIDE = t / N_PHI_REG;
    localparam int unsigned PHI  = t % N_PHI_REG;
    localparam bit HAS_R  = (PHI != N_PHI_REG - 1);
    localparam bit HAS_A  = (SIDE == 0);

    logic [FASTOR_W-1:0] nr, na, nar;
    if (HAS_R) begin : g_r
      assign nr = data_ram[t+1];
    end else begin : g_nr
      assign nr = '0;
    end
    if (HAS_A) begin : g_a
      assign na = data_ram[t+N_PHI_REG];
    end else begin : g_na
      assign na = '0;
    end
    if (HAS_A && HAS_R) begin : g_ar
      assign nar = data_ram[t+N_PHI_REG+1];
    end else begin : g_nar
      assign nar = '0;
    end

    logic                ph_rv [8], ph_rh [8];
    logic [3:0]          ph_ri [8];
    logic [PH_SUM_W-1:0] ph_rs [8];
    logic                lk, er, pv;

    region_proc u_region (
      .clk_bit, .rst_bit, .clk, .rst,
      .din(link_din[t]), .sync_start, .tap(link_tap[t]), .locked(lk), .sync_error(er),
      .mirror(SIDE == 1), .prim_valid(pv), .prim_idx(prim_idx[t]), .prim_data(prim_data[t]),
      .rx_ready(rx_ready[t]), .start_processing, .thr_photon,
      .data_ram(data_ram[t]), .nbr_r(nr), .nbr_a(na), .nbr_ar(nar),
      .ph_res_valid(ph_rv), .ph_res_hit(ph_rh), .ph_res_idx(ph_ri), .ph_res_sum(ph_rs),
      .ph_hit_map(raw_map[t]), .proc_done(proc_done[t]),
      .sr_rd_addr, .sr_rd_data(sr_data[t]), .sr_done(sr_done[t])
    );
    assign link_locked[t] = lk;
    assign link_error[t]  = er;
    assign prim_valid[t]  = pv;

    // edge masks
    for (genvar j = 0; j < 8; j++) begin : g_mask
      localparam bit ROW3 = (j % 4 == 3);
      localparam bit ODD  = (j >= 4);
      logic [N_PH_PATCH-1:0] m;
      always_comb begin
        m = '1;
        if (ROW3 && !HAS_R) m = '0;
        if (ODD && !HAS_A)  m[N_PH_PATCH-1] = 1'b0;
      end
      assign ph_hit_map[t][j] = raw_map[t][j] & m;
    end
  end

  // ---------------- jet processor ----------------
  logic jet_start, jet_done, jet_busy;
  logic                 j_rv [2*JET_PROCS], j_rh [2*JET_PROCS];
  logic [3:0]           j_ri [2*JET_PROCS];
  logic [JET_SUM_W-1:0] j_rs [2*JET_PROCS];

  jet_proc u_jet (
    .clk, .rst, .start(jet_start), .thr_jet, .sr_rd_addr, .sr_data, .busy(jet_busy),
    .res_valid(j_rv), .res_hit(j_rh), .res_idx(j_ri), .res_sum(j_rs),
    .hit_map(jet_hit_map), .done(jet_done)
  );

  // ---------------- L1 sequencing ----------------
  typedef enum logic [1:0] {C_WAIT, C_PHOTON, C_JET} ctrl_e;
  ctrl_e ctrl;
  logic  thr_ok;

  logic any_gamma, any_jet;
  always_comb begin
    any_gamma = 1'b0;
    any_jet   = 1'b0;
    for (int t = 0; t < N_TRU; t++)
      for (int j = 0; j < 8; j++)
        any_gamma |= |ph_hit_map[t][j];
    for (int i = 0; i < 2*JET_PROCS; i++) any_jet |= |jet_hit_map[i];
  end

  logic all_ready;
  assign all_ready = &(rx_ready | ~tru_enable);

  always_ff @(posedge clk) begin
    if (rst) begin
      ctrl             <= C_WAIT;
      thr_ok           <= 1'b0;
      start_processing <= 1'b0;
      jet_start        <= 1'b0;
      l1_valid         <= 1'b0;
      l1_gamma         <= 1'b0;
      l1_jet           <= 1'b0;
    end else begin
      start_processing <= 1'b0;
      jet_start        <= 1'b0;
      l1_valid         <= 1'b0;
      if (thr_v_ph && thr_v_jet) thr_ok <= 1'b1;
      unique case (ctrl)
        C_WAIT: if (thr_ok && all_ready && !ro_full && !start_processing) begin
          start_processing <= 1'b1;
          ctrl             <= C_PHOTON;
        end
        C_PHOTON: if (proc_done[0]) begin
          jet_start <= 1'b1;
          ctrl      <= C_JET;
        end
        C_JET: if (jet_done) begin
          l1_valid <= 1'b1;
          l1_gamma <= any_gamma;
          l1_jet   <= any_jet;
          thr_ok   <= 1'b0;
          ctrl     <= C_WAIT;
        end
        default: ctrl <= C_WAIT;
      endcase
    end
  end

  assign l1_busy = (ctrl != C_WAIT);

  // ---------------- multievent readout buffer ----------------
  readout_buffer #(.NEV(4)) u_ro (
    .clk, .rst,
    .capture_start(start_processing), .ts_in(data_ram),
    .commit(l1_valid), .thr_photon, .thr_jet, .l1_gamma, .l1_jet,
    .ph_hit_map, .jet_hit_map,
    .full(ro_full), .n_events(ro_n_events),
    .l2_accept, .l2_reject, .l2_ready,
    .ro_valid, .ro_data, .ro_last, .ro_ready
  );

endmodule
