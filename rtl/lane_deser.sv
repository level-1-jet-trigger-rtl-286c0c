// lane_deser: deserializer of one LVDS data pair of a TRU link.
//
// The TRU sends its data pairs without any encoding, one bit per bit clock
// (400 Mb/s, ten times the LHC clock). This block shifts the delayed serial
// bit in MSB first and hands out a CHUNK_W-bit chunk every CHUNK_W bit clocks.
// A one-cycle `bitslip` pulse holds the chunk counter for one cycle, which
// moves the chunk boundary by one bit; the link synchronisation FSM uses it
// for character framing. The paper names deserializers and framing; the chunk
// width (half of a 12-bit word per pair) and the bitslip mechanism are this
// design's choices.
//
// Timing: `chunk_valid` is high for one bit clock; `chunk` holds the last
// CHUNK_W bits, the oldest in the MSB.
module lane_deser
  import stu_pkg::*;
#(
  parameter int unsigned W = CHUNK_W
) (
  input  logic         clk_bit,
  input  logic         rst,
  input  logic         din,
  input  logic         bitslip,
  output logic [W-1:0] chunk,
  output logic         chunk_valid
);

  logic [W-1:0]         sr;
  logic [$clog2(W)-1:0] cnt;

  always_ff @(posedge clk_bit) begin
    if (rst) begin
      sr          <= '0;
      cnt         <= '0;
      chunk       <= '0;
      chunk_valid <= 1'b0;
    end else begin
      sr          <= {sr[W-2:0], din};
      chunk_valid <= 1'b0;
      if (!bitslip) begin
        if (cnt == $bits(cnt)'(W - 1)) begin
          cnt         <= '0;
          chunk       <= {sr[W-2:0], din};
          chunk_valid <= 1'b1;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end

endmodule
