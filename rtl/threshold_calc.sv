// threshold_calc: event-by-event L1 threshold from the V0 multiplicity.
//
// The paper corrects the L1 thresholds with a second-order fit of the EMCal
// energy against the V0 information: thr = A*V0^2 + B*V0 + C. Here V0 is
// the sum of the charges of the two V0 plates (A and C) received for the
// event; A, B and C are signed fixed-point coefficients with FRAC fraction
// bits, loaded from the slow-control registers. The result is rounded down,
// clipped to [0, 2^OUT_W - 1] and held until the next event. One instance
// is used for the photon threshold and one for the jet threshold.
// The sum of the two plates, the widths and the fixed-point format are this
// design's choices; the paper gives only the polynomial.
//
// Timing: three pipeline stages. `thr_valid` pulses 3 clocks after
// `v0_valid`; `thr` is updated on the same edge.
module threshold_calc
  import stu_pkg::*;
#(
  parameter int unsigned OUT_W = THR_W,
  parameter int unsigned VW    = V0_W,
  parameter int unsigned CW    = COEF_W,
  parameter int unsigned FRAC  = 8
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 v0_valid,
  input  logic [VW-1:0]        v0a,
  input  logic [VW-1:0]        v0c,
  input  logic signed [CW-1:0] coef_a,
  input  logic signed [CW-1:0] coef_b,
  input  logic signed [CW-1:0] coef_c,
  output logic [OUT_W-1:0]     thr,
  output logic                 thr_valid
);

  localparam int unsigned SW = VW + 1;        // V0 sum
  localparam int unsigned QW = 2 * SW;        // V0^2
  localparam int unsigned PW = QW + CW + 2;   // products and their sum

  logic [SW-1:0]        v0_1;
  logic                 v1, v2;
  logic [QW-1:0]        sq_2;
  logic [SW-1:0]        v0_2;
  logic signed [PW-1:0] poly;

  always_comb begin
    poly = coef_a * $signed({1'b0, sq_2}) + coef_b * $signed({1'b0, v0_2})
         + PW'(coef_c);
  end

  logic signed [PW-1:0] shifted;
  assign shifted = poly >>> FRAC;

  always_ff @(posedge clk) begin
    if (rst) begin
      v0_1      <= '0;
      v1        <= 1'b0;
      v2        <= 1'b0;
      sq_2      <= '0;
      v0_2      <= '0;
      thr       <= '0;
      thr_valid <= 1'b0;
    end else begin
      // stage 1: V0 = V0A + V0C
      v1   <= v0_valid;
      if (v0_valid) v0_1 <= SW'(v0a) + SW'(v0c);
      // stage 2: V0^2
      v2   <= v1;
      if (v1) begin
        sq_2 <= QW'(v0_1) * QW'(v0_1);
        v0_2 <= v0_1;
      end
      // stage 3: polynomial, floor, clip
      thr_valid <= v2;
      if (v2) begin
        if (shifted < 0)                                thr <= '0;
        else if (shifted > PW'({OUT_W{1'b1}}))          thr <= '1;
        else                                            thr <= OUT_W'(shifted);
      end
    end
  end

endmodule
