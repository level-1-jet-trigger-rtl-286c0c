// reception_fsm: frame reception and mirroring for one TRU link.
//
// Joins the chunks of the two data pairs into 12-bit words (pair 1 gives the
// upper half) and writes the 96 words of a frame into the reception RAM.
// Each pair is framed on its own: it waits for its half of the frame start
// marker, then queues the next 96 chunks in a 2-entry FIFO. A word is formed
// when both FIFOs hold a chunk, so the two halves of a word are matched by
// their position in the frame whatever the skew between the pairs (up to
// one chunk). The write pointer is a reordering pointer: for a link from an
// A-side supermodule (`mirror` = 1) fastOR #95 is written at address 0 and
// fastOR #0 at address 95, which undoes the physical mirroring of the
// supermodules inserted from the opposite side (paper). Every word is also
// presented on the `prim_*` port for the saving of primitive data (time
// sums) for readout.
// The paper gives the mirroring and the RAM; the start marker, the pair
// split and the per-pair alignment are this design's choices.
//
// Timing: all in the bit clock domain. After the 96th word, `frame_done`
// pulses for one clock and `frame_toggle` changes level, for a
// synchroniser in the processing clock domain.
module reception_fsm
  import stu_pkg::*;
(
  input  logic                        clk_bit,
  input  logic                        rst,
  input  logic                        enable,    // link locked
  input  logic                        mirror,    // A-side link
  input  logic [CHUNK_W-1:0]          chunk0,
  input  logic                        valid0,
  input  logic [CHUNK_W-1:0]          chunk1,
  input  logic                        valid1,
  output logic                        we,
  output logic [$clog2(N_FASTOR)-1:0] waddr,
  output logic [FASTOR_W-1:0]         wdata,
  output logic                        prim_valid,
  output logic [$clog2(N_FASTOR)-1:0] prim_idx,
  output logic [FASTOR_W-1:0]         prim_data,
  output logic                        frame_done,
  output logic                        frame_toggle
);

  localparam int unsigned AW = $clog2(N_FASTOR);

  // ---------------- per-pair alignment ----------------
  logic [CHUNK_W-1:0] chunk_in [2];
  logic               valid_in [2];
  logic [CHUNK_W-1:0] marker   [2];
  assign chunk_in[0] = chunk0;
  assign chunk_in[1] = chunk1;
  assign valid_in[0] = valid0;
  assign valid_in[1] = valid1;
  assign marker[0]   = START_WORD[CHUNK_W-1:0];
  assign marker[1]   = START_WORD[2*CHUNK_W-1:CHUNK_W];

  logic               armed [2];
  logic [AW:0]        cnt   [2];     // chunks queued in this frame
  logic [CHUNK_W-1:0] fifo  [2][2];
  logic               wp    [2], rp [2];
  logic [1:0]         fill  [2];
  logic               pop;

  assign pop = (fill[0] != 0) && (fill[1] != 0);

  for (genvar l = 0; l < 2; l++) begin : g_pair
    logic push;
    assign push = enable && valid_in[l] && armed[l];
    always_ff @(posedge clk_bit) begin
      if (rst || !enable) begin
        armed[l] <= 1'b0;
        cnt[l]   <= '0;
        wp[l]    <= 1'b0;
        rp[l]    <= 1'b0;
        fill[l]  <= '0;
        fifo[l][0] <= '0;
        fifo[l][1] <= '0;
      end else begin
        if (valid_in[l]) begin
          if (!armed[l]) begin
            if (chunk_in[l] == marker[l]) begin
              armed[l] <= 1'b1;
              cnt[l]   <= '0;
            end
          end else begin
            fifo[l][wp[l]] <= chunk_in[l];
            wp[l]          <= ~wp[l];
            if (cnt[l] == (AW+1)'(N_FASTOR - 1)) armed[l] <= 1'b0;
            cnt[l] <= cnt[l] + 1'b1;
          end
        end
        if (pop) rp[l] <= ~rp[l];
        fill[l] <= fill[l] + 2'(push) - 2'(pop);
      end
    end
  end

  // ---------------- word write ----------------
  logic [AW-1:0]       idx;
  logic [FASTOR_W-1:0] word;
  assign word = {fifo[1][rp[1]], fifo[0][rp[0]]};

  always_ff @(posedge clk_bit) begin
    if (rst || !enable) begin
      idx          <= '0;
      we           <= 1'b0;
      waddr        <= '0;
      wdata        <= '0;
      prim_valid   <= 1'b0;
      prim_idx     <= '0;
      prim_data    <= '0;
      frame_done   <= 1'b0;
      if (rst) frame_toggle <= 1'b0;
    end else begin
      we         <= 1'b0;
      prim_valid <= 1'b0;
      frame_done <= 1'b0;
      if (pop) begin
        we         <= 1'b1;
        waddr      <= mirror ? AW'(N_FASTOR - 1) - idx : idx;
        wdata      <= word;
        prim_valid <= 1'b1;
        prim_idx   <= idx;
        prim_data  <= word;
        if (idx == AW'(N_FASTOR - 1)) begin
          idx          <= '0;
          frame_done   <= 1'b1;
          frame_toggle <= ~frame_toggle;
        end else idx <= idx + 1'b1;
      end
    end
  end

endmodule
