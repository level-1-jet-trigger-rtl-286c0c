// link_sync: start-of-run synchronisation of one data pair of a TRU link.
//
// Follows the two steps the paper describes. (1) Data phase alignment: the
// FSM steps the pair's input delay through all 64 taps; at each tap it lets
// the delay settle, then checks that STABLE_N successive chunks are all equal
// (the TRU is sending a fixed training pattern, so a sampling point inside the
// data eye gives a constant chunk). The first contiguous zone of stable taps
// is recorded and its central tap applied. (2) Character framing: bitslip
// pulses are issued until the chunk equals the training chunk.
// The settle time, STABLE_N, the training pattern and the "first zone" rule
// are this design's choices.
//
// Interface: `start` (one pulse) begins a run; `tap` drives the external delay
// element (a process-specific primitive, outside this RTL); `bitslip` goes to
// lane_deser. `locked` stays high when both steps succeeded; `error` when no
// stable tap was found or framing failed. `zone_lo/zone_hi` report the zone.
module link_sync
  import stu_pkg::*;
#(
  parameter int unsigned        W        = CHUNK_W,
  parameter int unsigned        NTAP     = 64,
  parameter int unsigned        SETTLE_N = 2,
  parameter int unsigned        STABLE_N = 16,
  parameter logic [W-1:0]       TRAIN    = TRAIN_CHUNK
) (
  input  logic                    clk_bit,
  input  logic                    rst,
  input  logic                    start,
  input  logic [W-1:0]            chunk,
  input  logic                    chunk_valid,
  output logic [$clog2(NTAP)-1:0] tap,
  output logic                    bitslip,
  output logic                    locked,
  output logic                    error,
  output logic [$clog2(NTAP)-1:0] zone_lo,
  output logic [$clog2(NTAP)-1:0] zone_hi
);

  localparam int unsigned TW = $clog2(NTAP);

  typedef enum logic [2:0] {
    S_IDLE, S_SETTLE, S_CHECK, S_CENTRE, S_FRAME_SETTLE, S_FRAME, S_LOCKED, S_ERROR
  } state_e;

  state_e       state;
  logic [7:0]   n;          // chunks counted in the current step
  logic [W-1:0] ref_chunk;
  logic         stable;     // all chunks equal so far at this tap
  logic         in_zone, zone_found;
  logic [3:0]   slips;

  assign locked = (state == S_LOCKED);
  assign error  = (state == S_ERROR);

  always_ff @(posedge clk_bit) begin
    if (rst) begin
      state      <= S_IDLE;
      tap        <= '0;
      bitslip    <= 1'b0;
      n          <= '0;
      ref_chunk  <= '0;
      stable     <= 1'b0;
      in_zone    <= 1'b0;
      zone_found <= 1'b0;
      zone_lo    <= '0;
      zone_hi    <= '0;
      slips      <= '0;
    end else begin
      bitslip <= 1'b0;
      if (start) begin
        state      <= S_SETTLE;
        tap        <= '0;
        n          <= '0;
        in_zone    <= 1'b0;
        zone_found <= 1'b0;
        slips      <= '0;
      end else begin
        unique case (state)
          S_IDLE, S_LOCKED, S_ERROR: ;
          S_SETTLE: if (chunk_valid) begin
            if (n == 8'(SETTLE_N - 1)) begin
              n     <= '0;
              state <= S_CHECK;
            end else n <= n + 1'b1;
          end
          S_CHECK: if (chunk_valid) begin
            if (n == 0) begin
              ref_chunk <= chunk;
              stable    <= 1'b1;
              n         <= n + 1'b1;
            end else begin
              automatic logic st = stable && (chunk == ref_chunk);
              if (n == 8'(STABLE_N - 1)) begin
                n <= '0;
                // end of this tap: update the stable zone
                if (st) begin
                  if (!in_zone) zone_lo <= tap;
                  zone_hi <= tap;
                  in_zone <= 1'b1;
                end
                if ((!st && in_zone) || (tap == TW'(NTAP - 1))) begin
                  state      <= S_CENTRE;
                  zone_found <= in_zone || st;
                end else begin
                  tap   <= tap + 1'b1;
                  state <= S_SETTLE;
                end
              end else begin
                stable <= st;
                n      <= n + 1'b1;
              end
            end
          end
          S_CENTRE: begin
            if (zone_found) begin
              tap   <= TW'(({1'b0, zone_lo} + {1'b0, zone_hi}) >> 1);
              state <= S_FRAME_SETTLE;
              n     <= '0;
            end else state <= S_ERROR;
          end
          S_FRAME_SETTLE: if (chunk_valid) begin
            if (n == 8'(SETTLE_N - 1)) begin
              n     <= '0;
              state <= S_FRAME;
            end else n <= n + 1'b1;
          end
          S_FRAME: if (chunk_valid) begin
            if (chunk == TRAIN) state <= S_LOCKED;
            else if (slips == 4'(W)) state <= S_ERROR;
            else begin
              bitslip <= 1'b1;
              slips   <= slips + 1'b1;
              state   <= S_FRAME_SETTLE;
            end
          end
          default: state <= S_IDLE;
        endcase
      end
    end
  end

endmodule
