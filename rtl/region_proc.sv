// region_proc: photon patches processor of one TRU region.
//
// One instance per TRU link, as in the paper. It contains:
//   * two lane_deser + link_sync pairs (the two 400 Mb/s data pairs);
//   * reception_fsm, which writes the 96 time sums into rx_ram, mirrored for
//     an A-side link;
//   * distribution_fsm, which reads the RAM 100 times (96 words + the first
//     column of the eta neighbour) and dispatches every word to the patch
//     processors by its position in the map;
//   * two columns of 4 patch_proc: E0..E3 (even first column) and O0..O3 (odd
//     first column), 12 patches each, 96 photon 2x2 patches per region;
//   * subregion_proc, building the 6 4x4 subregion sums for the jet processor.
// Neighbour data: `data_ram` is this region's RAM output, to be wired to the
// neighbours; `nbr_r` is the RAM output of the next region in phi, `nbr_a`
// that of the eta neighbour on the other side, `nbr_ar` that of the diagonal
// neighbour. Tie them to 0 where no neighbour exists.
//
// Clocks: the link side runs on `clk_bit`, the processing on `clk`. A frame's
// completion crosses with a toggle and a two-flop synchroniser; `rx_ready`
// stays high from then until `start_processing`. After `start_processing` the
// results of patch k of processor j appear on ph_res_*[j] ~k*8+5 clocks
// later (j = 0..3 even, 4..7 odd); `proc_done` pulses after the last compare,
// 102 clocks after `start_processing`.
module region_proc
  import stu_pkg::*;
(
  input  logic                          clk_bit,
  input  logic                          rst_bit,
  input  logic                          clk,
  input  logic                          rst,
  // link
  input  logic [1:0]                    din,
  input  logic                          sync_start,
  output logic [TAP_W-1:0]              tap      [2],
  output logic                          locked,
  output logic                          sync_error,
  input  logic                          mirror,
  output logic                          prim_valid,
  output logic [$clog2(N_FASTOR)-1:0]   prim_idx,
  output logic [FASTOR_W-1:0]           prim_data,
  // processing
  output logic                          rx_ready,
  input  logic                          start_processing,
  input  logic [THR_W-1:0]              thr_photon,
  output logic [FASTOR_W-1:0]           data_ram,
  input  logic [FASTOR_W-1:0]           nbr_r,
  input  logic [FASTOR_W-1:0]           nbr_a,
  input  logic [FASTOR_W-1:0]           nbr_ar,
  output logic                          ph_res_valid [8],
  output logic                          ph_res_hit   [8],
  output logic [3:0]                    ph_res_idx   [8],
  output logic [PH_SUM_W-1:0]           ph_res_sum   [8],
  output logic [N_PH_PATCH-1:0]         ph_hit_map   [8],
  output logic                          proc_done,
  input  logic [$clog2(SR_PER_REG)-1:0] sr_rd_addr,
  output logic [SR_W-1:0]               sr_rd_data,
  output logic                          sr_done
);

  localparam int unsigned AW = $clog2(N_FASTOR);

  // ---------------- link side (clk_bit) ----------------
  logic [CHUNK_W-1:0] chunk [2];
  logic               chunk_v [2];
  logic               bslip [2];
  logic               lk [2];
  logic               er [2];
  logic [TAP_W-1:0]   zlo [2], zhi [2];

  for (genvar l = 0; l < 2; l++) begin : g_lane
    lane_deser u_deser (
      .clk_bit, .rst(rst_bit), .din(din[l]), .bitslip(bslip[l]),
      .chunk(chunk[l]), .chunk_valid(chunk_v[l])
    );
    link_sync u_sync (
      .clk_bit, .rst(rst_bit), .start(sync_start),
      .chunk(chunk[l]), .chunk_valid(chunk_v[l]),
      .tap(tap[l]), .bitslip(bslip[l]), .locked(lk[l]), .error(er[l]),
      .zone_lo(zlo[l]), .zone_hi(zhi[l])
    );
  end

  assign locked     = lk[0] && lk[1];
  assign sync_error = er[0] || er[1];

  logic               we;
  logic [AW-1:0]      waddr;
  logic [FASTOR_W-1:0] wdata;
  logic               frame_done, frame_toggle;

  reception_fsm u_rx (
    .clk_bit, .rst(rst_bit), .enable(locked), .mirror,
    .chunk0(chunk[0]), .valid0(chunk_v[0]), .chunk1(chunk[1]), .valid1(chunk_v[1]),
    .we, .waddr, .wdata, .prim_valid, .prim_idx, .prim_data,
    .frame_done, .frame_toggle
  );

  logic [AW-1:0] raddr;

  rx_ram u_ram (
    .wclk(clk_bit), .we, .waddr, .wdata,
    .rclk(clk), .raddr, .rdata(data_ram)
  );

  // ---------------- clock domain crossing of frame completion ----------------
  logic [2:0] tsync;
  always_ff @(posedge clk) begin
    if (rst) begin
      tsync    <= '0;
      rx_ready <= 1'b0;
    end else begin
      tsync <= {tsync[1:0], frame_toggle};
      if (start_processing)         rx_ready <= 1'b0;
      else if (tsync[2] ^ tsync[1]) rx_ready <= 1'b1;
    end
  end

  // ---------------- processing side (clk) ----------------
  logic [3:0] ld_even, ld_odd;
  src_e       src_even [4];
  src_e       src_odd  [4];
  logic       above_96, data_avail, dist_done, dist_busy;

  distribution_fsm u_dist (
    .clk, .rst, .start(start_processing), .raddr, .busy(dist_busy),
    .ld_even, .ld_odd, .src_even, .src_odd, .above_96, .data_avail, .done(dist_done)
  );

  function automatic logic [FASTOR_W-1:0] pick(src_e s, logic [FASTOR_W-1:0] own,
                                               logic [FASTOR_W-1:0] r,
                                               logic [FASTOR_W-1:0] a,
                                               logic [FASTOR_W-1:0] ar);
    unique case (s)
      SRC_OWN: return own;
      SRC_R:   return r;
      SRC_A:   return a;
      SRC_AR:  return ar;
      default: return own;
    endcase
  endfunction

  logic                ld  [8];
  logic [FASTOR_W-1:0] pdin[8];
  always_comb begin
    for (int i = 0; i < 4; i++) begin
      ld[i]     = ld_even[i];
      pdin[i]   = pick(src_even[i], data_ram, nbr_r, nbr_a, nbr_ar);
      ld[4+i]   = ld_odd[i];
      pdin[4+i] = pick(src_odd[i], data_ram, nbr_r, nbr_a, nbr_ar);
    end
  end

  for (genvar j = 0; j < 8; j++) begin : g_patch
    patch_proc #(
      .IN_W(FASTOR_W), .SUM_W(PH_SUM_W), .THR_BW(THR_W), .NPATCH(N_PH_PATCH), .IDX_W(4)
    ) u_pp (
      .clk, .rst, .clear(start_processing), .ld(ld[j]), .din(pdin[j]), .thr(thr_photon),
      .res_valid(ph_res_valid[j]), .res_hit(ph_res_hit[j]), .res_idx(ph_res_idx[j]),
      .res_sum(ph_res_sum[j]), .hit_map(ph_hit_map[j])
    );
  end

  always_ff @(posedge clk) begin
    if (rst) proc_done <= 1'b0;
    else     proc_done <= dist_done;
  end

  subregion_proc u_sr (
    .clk, .rst, .clear(start_processing), .data_avail, .din(data_ram),
    .rd_addr(sr_rd_addr), .rd_data(sr_rd_data), .done(sr_done)
  );

endmodule
