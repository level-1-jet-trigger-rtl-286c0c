// readout_buffer: multievent buffer of the STU data read out on L2 accept.
//
// For each processed event the STU keeps what is read out to the data
// acquisition: the TRU time sums of all 32 regions, the triggering patch
// positions (the photon and jet hit maps) and the thresholds used. Events
// are kept in NEV slots used as a FIFO. The time sums are captured while the
// regions run their photon processing: all regions read their reception RAM
// in lock-step, so on each of the first 96 reads the 32 RAM outputs form one
// 384-bit row (fastOR address a of every region), written to row a of the
// current slot. When `commit` pulses (together with the L1 result) the
// thresholds, L1 flags and hit maps are stored into the same slot and the
// slot is closed. An L2 decision applies to the oldest closed slot: a reject
// frees it, an accept sends it out as 32-bit words and then frees it.
//
// Event format (this design's own choice; the paper lists only the contents):
//   word 0            {8'hA5, 8'(slot), 16'(event number)}
//   word 1, 2         photon threshold, jet threshold (zero-extended)
//   word 3            {30'b0, l1_jet, l1_gamma}
//   words 4..99       photon hit maps, 3 words per region t = 0..31,
//                     bit 12*j + k of the region's 96 bits = processor j,
//                     patch k, least significant word first
//   words 100..105    jet hit map, bit 8*i + k = jet processor i, patch k
//   words 106..3177   time sums, region-major: {3'b0, 5'(t), 7'(a), 5'b0,
//                     12'(value)} for t = 0..31, a = 0..95 (mirrored order
//                     for A-side regions, as stored on reception)
//   word 3178         trailer {8'h5A, 8'b0, 16'(event number)}, with `ro_last`
//
// Interface and timing: `capture_start` is the pulse that starts the photon
// processing; `ts_in` are the RAM outputs of the regions, whose row a is
// valid on the (a+2)-th clock after that pulse. `full` is high when all
// slots hold events; the controller must not start a new event then. The
// output is a valid/ready stream: a word is held until `ro_ready`. `l2_ready`
// is high when no event is being sent; decisions arriving while it is low,
// or with no closed event, are ignored.
//
// The paper states that multievent buffering is implemented and what is read
// out per event; the depth NEV, the FIFO order of L2 decisions, the word
// format and the capture from the lock-step RAM reads are this design's.
module readout_buffer
  import stu_pkg::*;
#(
  parameter int unsigned NEV = 4
)(
  input  logic                  clk,
  input  logic                  rst,
  // capture
  input  logic                  capture_start,
  input  logic [FASTOR_W-1:0]   ts_in       [N_TRU],
  input  logic                  commit,
  input  logic [THR_W-1:0]      thr_photon,
  input  logic [THR_W-1:0]      thr_jet,
  input  logic                  l1_gamma,
  input  logic                  l1_jet,
  input  logic [N_PH_PATCH-1:0] ph_hit_map  [N_TRU][8],
  input  logic [JET_PATCH-1:0]  jet_hit_map [2*JET_PROCS],
  output logic                  full,
  output logic [$clog2(NEV+1)-1:0] n_events,
  // L2 decisions
  input  logic                  l2_accept,
  input  logic                  l2_reject,
  output logic                  l2_ready,
  // readout stream
  output logic                  ro_valid,
  output logic [31:0]           ro_data,
  output logic                  ro_last,
  input  logic                  ro_ready
);

  localparam int unsigned SW        = (NEV > 1) ? $clog2(NEV) : 1;
  localparam int unsigned PH_BITS   = N_TRU * 8 * N_PH_PATCH;       // 3072
  localparam int unsigned JET_BITS  = 2 * JET_PROCS * JET_PATCH;    // 176
  localparam int unsigned JET_WORDS = (JET_BITS + 31) / 32;         // 6
  localparam int unsigned PH_WORDS  = PH_BITS / 32;                 // 96
  localparam int unsigned W_PH      = 4;
  localparam int unsigned W_JET     = W_PH + PH_WORDS;              // 100
  localparam int unsigned W_TS      = W_JET + JET_WORDS;            // 106
  localparam int unsigned W_TRL     = W_TS + N_TRU * N_FASTOR;      // 3178
  localparam int unsigned WI_W      = $clog2(W_TRL + 1);
  localparam int unsigned AW        = $clog2(N_FASTOR);

  // ---------------- storage ----------------
  logic [N_TRU*FASTOR_W-1:0] ts_mem  [NEV][N_FASTOR];
  logic [PH_BITS-1:0]        ph_mem  [NEV];
  logic [32*JET_WORDS-1:0]   jet_mem [NEV];
  logic [THR_W-1:0]          thrp_mem[NEV], thrj_mem[NEV];
  logic [1:0]                flag_mem[NEV];
  logic [15:0]               evn_mem [NEV];

  logic [SW-1:0] wr_slot, rd_slot;
  logic [15:0]   ev_count;

  // ---------------- capture of the time sums ----------------
  logic [1:0]    cap_st;   // 0 idle, 1 waiting for the RAM, 2 writing
  logic [AW-1:0] cap_a;
  logic [N_TRU*FASTOR_W-1:0] ts_row;

  always_comb
    for (int t = 0; t < N_TRU; t++) ts_row[t*FASTOR_W +: FASTOR_W] = ts_in[t];

  always_ff @(posedge clk) begin
    if (rst) begin
      cap_st <= 2'd0;
      cap_a  <= '0;
    end else if (capture_start) begin
      cap_st <= 2'd1;
      cap_a  <= '0;
    end else if (cap_st == 2'd1) begin
      cap_st <= 2'd2;
    end else if (cap_st == 2'd2) begin
      cap_a <= cap_a + 1'b1;
      if (cap_a == AW'(N_FASTOR - 1)) cap_st <= 2'd0;
    end
  end

  always_ff @(posedge clk) begin
    if (cap_st == 2'd2) ts_mem[wr_slot][cap_a] <= ts_row;
  end

  // ---------------- commit of the event header ----------------
  logic [PH_BITS-1:0]      ph_flat;
  logic [32*JET_WORDS-1:0] jet_flat;

  always_comb begin
    ph_flat  = '0;
    jet_flat = '0;
    for (int t = 0; t < N_TRU; t++)
      for (int j = 0; j < 8; j++)
        ph_flat[(t*8 + j)*N_PH_PATCH +: N_PH_PATCH] = ph_hit_map[t][j];
    for (int i = 0; i < 2*JET_PROCS; i++)
      jet_flat[i*JET_PATCH +: JET_PATCH] = jet_hit_map[i];
  end

  logic do_commit;
  assign do_commit = commit && !full;

  always_ff @(posedge clk) begin
    if (do_commit) begin
      ph_mem[wr_slot]   <= ph_flat;
      jet_mem[wr_slot]  <= jet_flat;
      thrp_mem[wr_slot] <= thr_photon;
      thrj_mem[wr_slot] <= thr_jet;
      flag_mem[wr_slot] <= {l1_jet, l1_gamma};
      evn_mem[wr_slot]  <= ev_count;
    end
  end

  // ---------------- L2 decisions and readout ----------------
  logic          sending;
  logic [WI_W-1:0] wi;
  logic          do_free;
  logic          word_take;

  assign l2_ready  = !sending;
  assign full      = (n_events == ($bits(n_events))'(NEV));
  assign word_take = ro_valid && ro_ready;
  assign do_free   = (l2_reject && !l2_accept && !sending && n_events != 0)
                  || (word_take && ro_last);

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_slot  <= '0;
      rd_slot  <= '0;
      n_events <= '0;
      ev_count <= '0;
      sending  <= 1'b0;
      wi       <= '0;
    end else begin
      if (do_commit) begin
        wr_slot  <= (wr_slot == SW'(NEV - 1)) ? '0 : wr_slot + 1'b1;
        ev_count <= ev_count + 1'b1;
      end
      if (do_free)
        rd_slot <= (rd_slot == SW'(NEV - 1)) ? '0 : rd_slot + 1'b1;
      n_events <= n_events + ($bits(n_events))'(do_commit) - ($bits(n_events))'(do_free);

      if (!sending && l2_accept && n_events != 0) begin
        sending <= 1'b1;
        wi      <= '0;
      end else if (word_take) begin
        if (ro_last) sending <= 1'b0;
        else         wi      <= wi + 1'b1;
      end
    end
  end

  // word wi of the event in rd_slot
  logic [31:0]   word;
  logic [4:0]    ts_t;
  logic [AW-1:0] ts_a;
  int unsigned   ts_n;

  always_comb begin
    ts_n = int'(wi) - W_TS;
    ts_t = 5'(ts_n / N_FASTOR);
    ts_a = AW'(ts_n % N_FASTOR);
    if (wi == 0)
      word = {8'hA5, 8'(rd_slot), evn_mem[rd_slot]};
    else if (wi == 1)
      word = 32'(thrp_mem[rd_slot]);
    else if (wi == 2)
      word = 32'(thrj_mem[rd_slot]);
    else if (wi == 3)
      word = {30'b0, flag_mem[rd_slot]};
    else if (wi < WI_W'(W_JET))
      word = ph_mem[rd_slot][(int'(wi) - W_PH)*32 +: 32];
    else if (wi < WI_W'(W_TS))
      word = jet_mem[rd_slot][(int'(wi) - W_JET)*32 +: 32];
    else if (wi < WI_W'(W_TRL))
      word = {3'b0, ts_t, 7'(ts_a), 5'b0,
              ts_mem[rd_slot][ts_a][ts_t*FASTOR_W +: FASTOR_W]};
    else
      word = {8'h5A, 8'h00, evn_mem[rd_slot]};
  end

  assign ro_valid = sending;
  assign ro_data  = word;
  assign ro_last  = sending && (wi == WI_W'(W_TRL));

endmodule
