// rx_ram: dual-port reception buffer of one TRU link (96 words of 12 bits).
//
// Write port in the link (bit clock) domain, read port in the processing
// clock domain, as the paper's "dual port RAM 96 words". The read is
// registered: `rdata` holds the word at `raddr` one clock after it was
// presented. The two-clock arrangement and the read latency are this
// design's choices. Contents are cleared at power-up.
module rx_ram
  import stu_pkg::*;
#(
  parameter int unsigned DEPTH = N_FASTOR,
  parameter int unsigned W     = FASTOR_W,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          wclk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          rclk,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);

  logic [W-1:0] mem [DEPTH];

  initial begin
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
  end

  always_ff @(posedge wclk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge rclk) begin
    rdata <= mem[raddr];
  end

endmodule
