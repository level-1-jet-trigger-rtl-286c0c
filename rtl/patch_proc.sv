// patch_proc: one patch processor, "4 accumulations + 1 comparison".
//
// Each `ld` adds `din` to an accumulator. On the fourth load the patch sum is
// complete: it is compared with the threshold right away, and the result
// (sum, hit flag, patch index) is presented for one clock on `res_*`. The
// accumulator then restarts for the next patch and the index advances, so
// successive patches handled by the same processor come out indexed 0, 1, 2,
// ... The hit of patch k is also kept in bit k of `hit_map` until the next
// `clear`, which gives the triggering patch positions of the event.
// The same processor serves the photon patches (2x2 fastOR, 12-bit inputs)
// and the jet patches (2x2 subregions, 16-bit inputs), as the paper says the
// jet processor is built like the photon one.
// A patch fires when its sum is strictly above the threshold (the paper says
// "compared"; strict inequality is this design's choice).
//
// Timing: `res_valid` rises one clock after the fourth `ld`; `hit_map` is
// updated on the same edge.
module patch_proc
  import stu_pkg::*;
#(
  parameter int unsigned IN_W   = FASTOR_W,
  parameter int unsigned SUM_W  = IN_W + 2,
  parameter int unsigned THR_BW = THR_W,
  parameter int unsigned NPATCH = N_PH_PATCH,
  parameter int unsigned IDX_W  = 4
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              clear,
  input  logic              ld,
  input  logic [IN_W-1:0]   din,
  input  logic [THR_BW-1:0] thr,
  output logic              res_valid,
  output logic              res_hit,
  output logic [IDX_W-1:0]  res_idx,
  output logic [SUM_W-1:0]  res_sum,
  output logic [NPATCH-1:0] hit_map
);

  logic [SUM_W-1:0] acc;
  logic [1:0]       nload;
  logic [IDX_W-1:0] idx;
  logic [SUM_W-1:0] sum_next;

  assign sum_next = acc + SUM_W'(din);

  always_ff @(posedge clk) begin
    if (rst || clear) begin
      acc       <= '0;
      nload     <= '0;
      idx       <= '0;
      res_valid <= 1'b0;
      res_hit   <= 1'b0;
      res_idx   <= '0;
      res_sum   <= '0;
      hit_map   <= '0;
    end else begin
      res_valid <= 1'b0;
      if (ld) begin
        if (nload == 2'd3) begin
          acc       <= '0;
          nload     <= '0;
          idx       <= idx + 1'b1;
          res_valid <= 1'b1;
          res_hit   <= ({{THR_BW{1'b0}}, sum_next} > {{SUM_W{1'b0}}, thr});
          res_idx   <= idx;
          res_sum   <= sum_next;
          if (idx < IDX_W'(NPATCH))
            hit_map[idx] <= ({{THR_BW{1'b0}}, sum_next} > {{SUM_W{1'b0}}, thr});
        end else begin
          acc   <= sum_next;
          nload <= nload + 1'b1;
        end
      end
    end
  end

endmodule
