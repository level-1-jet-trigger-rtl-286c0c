// distribution_fsm: data distribution FSM of one photon patches processor.
//
// On `start` it runs a read pointer p = 0..99 through the reception RAM: the
// 96 words of the region (column-major, word p is fastOR column p/4, row p%4)
// and then one more column (p = 96..99, "Above_96"), during which the RAM is
// read again at addresses 0..3 while the patch processors take the first
// column of the neighbouring region A instead. For each read it tells every
// one of the 8 patch processors whether to load and from which region, so
// that each computes exactly the 2x2 patches listed in the paper:
//   E<i> (i<3): rows i,i+1 of columns (2k,2k+1), own data;
//   E3        : row 3 own data and row 0 of the next region in phi (R);
//   O<i> (i<3): rows i,i+1 of columns (2k+1,2k+2), the last patch taking
//               column 0 of region A;
//   O3        : as O<i> with row 0 from R, and in the last column row 3 from A
//               and row 0 from the diagonal region (A+1,R).
// All regions run in lock-step from the same start, so the neighbour RAM
// outputs present the same (column,row) as the own RAM in every cycle. The
// strobes here are therefore computed from the local pointer; in the paper's
// figure the neighbour strobes come from the neighbour FSMs, which is the
// same in lock-step.
//
// Timing: `raddr` is issued from the pointer; the RAM answers one clock
// later, and all strobes (ld_*, src_*, above_96, data_avail) are registered
// to line up with that RAM output. `done` pulses with the last strobe.
// Some bits of src_even/src_odd are constant by construction (E0..E2 only
// ever take their own region's data); they are kept so that all processors
// share one select type.
module distribution_fsm
  import stu_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        start,
  output logic [$clog2(N_FASTOR)-1:0] raddr,
  output logic                        busy,
  output logic [3:0]                  ld_even,
  output logic [3:0]                  ld_odd,
  output src_e                        src_even [4],
  output src_e                        src_odd  [4],
  output logic                        above_96,
  output logic                        data_avail,
  output logic                        done
);

  localparam int unsigned PW = $clog2(N_READS);

  logic [PW-1:0] p;
  logic          run;

  // Pointer
  always_ff @(posedge clk) begin
    if (rst) begin
      p   <= '0;
      run <= 1'b0;
    end else if (start) begin
      p   <= '0;
      run <= 1'b1;
    end else if (run) begin
      if (p == PW'(N_READS - 1)) run <= 1'b0;
      else p <= p + 1'b1;
    end
  end

  assign busy  = run;
  assign raddr = (p >= PW'(N_FASTOR)) ? 7'(p - PW'(N_FASTOR)) : 7'(p);

  // Strobes for the word at p (combinational), registered below.
  logic [4:0] col;
  logic [1:0] row;
  logic       abv;
  logic [3:0] n_ld_even, n_ld_odd;
  src_e       n_src_even [4];
  src_e       n_src_odd  [4];

  always_comb begin
    col = 5'(p >> 2);
    row = p[1:0];
    abv = (p >= PW'(N_FASTOR));
    for (int i = 0; i < 4; i++) begin
      n_ld_even[i]  = 1'b0;
      n_ld_odd[i]   = 1'b0;
      n_src_even[i] = SRC_OWN;
      n_src_odd[i]  = SRC_OWN;
    end
    if (run) begin
      for (int i = 0; i < 3; i++) begin
        // even: columns 0..23, rows i and i+1
        n_ld_even[i] = !abv && (row == 2'(i) || row == 2'(i + 1));
        // odd: columns 1..24 (24 = column 0 of region A)
        n_ld_odd[i]  = (col != 0) && (row == 2'(i) || row == 2'(i + 1));
        n_src_odd[i] = abv ? SRC_A : SRC_OWN;
      end
      n_ld_even[3]  = !abv && (row == 2'd3 || row == 2'd0);
      n_src_even[3] = (row == 2'd0) ? SRC_R : SRC_OWN;
      n_ld_odd[3]   = (col != 0) && (row == 2'd3 || row == 2'd0);
      if (row == 2'd0) n_src_odd[3] = abv ? SRC_AR : SRC_R;
      else             n_src_odd[3] = abv ? SRC_A  : SRC_OWN;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      ld_even    <= '0;
      ld_odd     <= '0;
      above_96   <= 1'b0;
      data_avail <= 1'b0;
      done       <= 1'b0;
      for (int i = 0; i < 4; i++) begin
        src_even[i] <= SRC_OWN;
        src_odd[i]  <= SRC_OWN;
      end
    end else begin
      ld_even    <= n_ld_even;
      ld_odd     <= n_ld_odd;
      above_96   <= run && abv;
      data_avail <= run && !abv;
      done       <= run && (p == PW'(N_READS - 1));
      for (int i = 0; i < 4; i++) begin
        src_even[i] <= n_src_even[i];
        src_odd[i]  <= n_src_odd[i];
      end
    end
  end

endmodule
