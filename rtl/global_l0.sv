// global_l0: the global level-0 trigger.
//
// Each TRU forwards its local L0 candidate on a dedicated pair of its link;
// the global L0 is their OR (paper). The candidates are first registered
// twice in the LHC clock domain (they come from other boards), masked by a
// slow-control enable per TRU, and ORed. The pattern of the TRUs that fired
// is registered with the decision for the event readout. The two-flop input
// stage and the mask are this design's choices.
//
// Timing: `l0_global` follows a candidate by 3 clocks.
module global_l0
  import stu_pkg::*;
#(
  parameter int unsigned N = N_TRU
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [N-1:0] l0_local,
  input  logic [N-1:0] tru_enable,
  output logic         l0_global,
  output logic [N-1:0] l0_pattern
);

  logic [N-1:0] s1, s2;

  always_ff @(posedge clk) begin
    if (rst) begin
      s1         <= '0;
      s2         <= '0;
      l0_global  <= 1'b0;
      l0_pattern <= '0;
    end else begin
      s1         <= l0_local;
      s2         <= s1;
      l0_global  <= |(s2 & tru_enable);
      l0_pattern <= s2 & tru_enable;
    end
  end

endmodule
