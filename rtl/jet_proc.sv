// jet_proc: the L1 jet patch processor.
//
// Once every region has built its 6 subregions, the calorimeter is a map of
// 12 rows (eta) x 16 columns (phi) of 4x4-fastOR subregions. Region t of the
// top level (t = side*16 + phi index, side 0 = C, 1 = A) holds rows
// side*6 .. side*6+5 of column `phi`. This processor reads the map one
// subregion per clock, column by column (192 reads), and feeds two columns
// of 11 patch processors, as the paper describes: processor J_E<i> sums rows
// i,i+1 of columns (2k,2k+1), k = 0..7, and J_O<i> rows i,i+1 of columns
// (2k+1,2k+2), k = 0..6, which gives 11 x 15 = 165 jet patches of 2x2
// subregions (16x16 fastOR). The order of the reads is this design's choice.
//
// Interface: `sr_rd_addr` goes to the read port of every region's subregion
// RAM; `sr_data[t]` comes back from region t one clock later. `start` begins a
// pass; results appear on `res_*` (index 0..10 even, 11..21 odd) and in the
// hit maps; `done` pulses 194 clocks after `start`.
// The odd processors have 7 patches, so bit 7 of their hit maps is always 0.
module jet_proc
  import stu_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst,
  input  logic                          start,
  input  logic [THR_W-1:0]              thr_jet,
  output logic [$clog2(SR_PER_REG)-1:0] sr_rd_addr,
  input  logic [SR_W-1:0]               sr_data [N_TRU],
  output logic                          busy,
  output logic                          res_valid [2*JET_PROCS],
  output logic                          res_hit   [2*JET_PROCS],
  output logic [3:0]                    res_idx   [2*JET_PROCS],
  output logic [JET_SUM_W-1:0]          res_sum   [2*JET_PROCS],
  output logic [JET_PATCH-1:0]          hit_map   [2*JET_PROCS],
  output logic                          done
);

  localparam int unsigned NREAD = JET_ROWS * JET_COLS;  // 192
  localparam int unsigned QW    = $clog2(NREAD);

  logic [QW-1:0] q;
  logic          run;
  logic [3:0]    row, col;   // eta row 0..11, phi column 0..15

  always_ff @(posedge clk) begin
    if (rst) begin
      q   <= '0;
      run <= 1'b0;
    end else if (start) begin
      q   <= '0;
      run <= 1'b1;
    end else if (run) begin
      if (q == QW'(NREAD - 1)) run <= 1'b0;
      else q <= q + 1'b1;
    end
  end

  assign busy = run;
  assign col  = 4'(q / JET_ROWS);
  assign row  = 4'(q % JET_ROWS);
  assign sr_rd_addr = $bits(sr_rd_addr)'(row % SR_PER_REG);

  // Registered strobes, aligned with the subregion RAM output.
  logic [4:0] sel_q;
  logic [3:0] row_q, col_q;
  logic       v_q, last_q;
  always_ff @(posedge clk) begin
    if (rst) begin
      sel_q  <= '0;
      row_q  <= '0;
      col_q  <= '0;
      v_q    <= 1'b0;
      last_q <= 1'b0;
      done   <= 1'b0;
    end else begin
      sel_q  <= (row >= 4'(SR_PER_REG)) ? 5'd16 + 5'(col) : 5'(col);
      row_q  <= row;
      col_q  <= col;
      v_q    <= run;
      last_q <= run && (q == QW'(NREAD - 1));
      done   <= last_q;    // one clock for the last comparison
    end
  end

  logic [SR_W-1:0] d;
  assign d = sr_data[sel_q];

  for (genvar i = 0; i < JET_PROCS; i++) begin : g_row
    logic in_rows;
    assign in_rows = (row_q == 4'(i)) || (row_q == 4'(i + 1));

    patch_proc #(
      .IN_W(SR_W), .SUM_W(JET_SUM_W), .THR_BW(THR_W), .NPATCH(JET_PATCH), .IDX_W(4)
    ) u_even (
      .clk, .rst, .clear(start), .ld(v_q && in_rows), .din(d), .thr(thr_jet),
      .res_valid(res_valid[i]), .res_hit(res_hit[i]), .res_idx(res_idx[i]),
      .res_sum(res_sum[i]), .hit_map(hit_map[i])
    );

    logic [JET_PATCH-2:0] odd_map;
    patch_proc #(
      .IN_W(SR_W), .SUM_W(JET_SUM_W), .THR_BW(THR_W), .NPATCH(JET_PATCH - 1), .IDX_W(4)
    ) u_odd (
      .clk, .rst, .clear(start),
      .ld(v_q && in_rows && (col_q != 4'd0) && (col_q != 4'(JET_COLS - 1))),
      .din(d), .thr(thr_jet),
      .res_valid(res_valid[JET_PROCS+i]), .res_hit(res_hit[JET_PROCS+i]),
      .res_idx(res_idx[JET_PROCS+i]), .res_sum(res_sum[JET_PROCS+i]),
      .hit_map(odd_map)
    );
    assign hit_map[JET_PROCS+i] = {1'b0, odd_map};
  end

endmodule
