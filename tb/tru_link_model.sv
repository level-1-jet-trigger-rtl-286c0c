// tru_link_model: behavioural model of one TRU transmitter, its cable and the
// per-pair input delay of the receiving FPGA (testbench use only).
//
// The transmitter sends 12-bit words on two pairs, 6 bits each (pair 1 the
// upper half), MSB first, one bit per bit clock, with no encoding; between
// frames it repeats the training word. `send_frame` queues a start marker
// and 96 values. The receiving delay element is modelled only by its effect
// on sampling: for a tap inside [EYE_LO, EYE_HI] of a pair the bit is
// received correctly, outside it every bit is randomly corrupted. PHASE sets
// the transmitter's chunk phase at reset and SKEW delays pair 1 by some bits,
// so that the receiver's framing has work to do.
module tru_link_model
  import stu_pkg::*;
#(
  parameter int unsigned EYE_LO0 = 20,
  parameter int unsigned EYE_HI0 = 35,
  parameter int unsigned EYE_LO1 = 10,
  parameter int unsigned EYE_HI1 = 41,
  parameter int unsigned PHASE   = 2,
  parameter int unsigned SKEW    = 1
) (
  input  logic             clk_bit,
  input  logic [TAP_W-1:0] tap [2],
  output logic [1:0]       dout
);

  logic [FASTOR_W-1:0] q[$];
  logic [FASTOR_W-1:0] cur = IDLE_WORD;
  int unsigned         cnt = PHASE;
  logic [7:0]          skew_sr = '0;
  logic [1:0]          tx;

  task automatic send_frame(input logic [FASTOR_W-1:0] v [N_FASTOR]);
    q.push_back(START_WORD);
    for (int i = 0; i < N_FASTOR; i++) q.push_back(v[i]);
  endtask

  function automatic bit idle();
    return q.size() == 0;
  endfunction

  always @(posedge clk_bit) begin
    if (cnt == CHUNK_W - 1) begin
      cnt <= 0;
      cur <= (q.size() != 0) ? q.pop_front() : IDLE_WORD;
    end else cnt <= cnt + 1;
    skew_sr <= {skew_sr[6:0], tx[1]};
  end

  always_comb begin
    tx[0] = cur[CHUNK_W - 1 - cnt];
    tx[1] = cur[2*CHUNK_W - 1 - cnt];
  end

  logic d1;
  assign d1 = (SKEW == 0) ? tx[1] : skew_sr[SKEW-1];

  always @(negedge clk_bit) begin
    dout[0] <= (tap[0] >= TAP_W'(EYE_LO0) && tap[0] <= TAP_W'(EYE_HI0)) ? tx[0] : tx[0] ^ 1'($urandom);
    dout[1] <= (tap[1] >= TAP_W'(EYE_LO1) && tap[1] <= TAP_W'(EYE_HI1)) ? d1 : d1 ^ 1'($urandom);
  end

endmodule
