// subregion_proc: subregion integrator of one TRU region.
//
// Builds the 6 subregions (4x4 fastOR) of the region for the jet processor.
// Because the RAM is read column-major, the 16 fastOR of one subregion (4
// columns of 4 rows) arrive on 16 successive `data_avail` cycles: the block
// accumulates them and writes the 16-bit sum into a 6-word RAM, six times.
// The paper's text says "6 times 16 successive accumulations followed by a
// memory write"; its figure labels the block "8 Acc + 1 save". The
// accumulation count follows the text, the only count consistent with a
// 4x4 subregion and a 12-bit input feeding a 16-bit word (both printed).
//
// Interface: `clear` restarts the subregion count for a new event. The RAM
// has a registered read port (`rd_addr` -> `rd_data` one clock later) for the
// jet processor. `done` pulses one clock after the sixth write.
module subregion_proc
  import stu_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst,
  input  logic                          clear,
  input  logic                          data_avail,
  input  logic [FASTOR_W-1:0]           din,
  input  logic [$clog2(SR_PER_REG)-1:0] rd_addr,
  output logic [SR_W-1:0]               rd_data,
  output logic                          done
);

  localparam int unsigned MW = $clog2(SR_PER_REG);

  logic [SR_W-1:0] mem [SR_PER_REG];
  logic [SR_W-1:0] acc;
  logic [3:0]      n;     // accumulations in the current subregion
  logic [MW-1:0]   m;     // subregion being built
  logic            wr;
  logic [SR_W-1:0] sum_next;

  assign sum_next = acc + SR_W'(din);
  assign wr       = data_avail && (n == 4'd15);

  initial for (int i = 0; i < SR_PER_REG; i++) mem[i] = '0;

  always_ff @(posedge clk) begin
    if (wr) mem[m] <= sum_next;
  end

  always_ff @(posedge clk) begin
    rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk) begin
    if (rst || clear) begin
      acc  <= '0;
      n    <= '0;
      m    <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (data_avail) begin
        if (wr) begin
          acc <= '0;
          n   <= '0;
          if (m == MW'(SR_PER_REG - 1)) begin
            m    <= '0;
            done <= 1'b1;
          end else m <= m + 1'b1;
        end else begin
          acc <= sum_next;
          n   <= n + 1'b1;
        end
      end
    end
  end

endmodule
