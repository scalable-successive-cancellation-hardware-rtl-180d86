// channel_buffer -- accepts the received frame one channel LLR per cycle and
// packs it into P-LLR words for the two channel SRAMs.
//
// LLR number i of the frame goes to lane i mod P of word i / P; words of the
// first half of the frame (i < N/2) are written to channel SRAM 1, the others
// to channel SRAM 2 at word address (i - N/2) / P. The word is written in the
// same cycle its last LLR arrives.
//
// The buffer also owns the channel-memory hand-off that lets a new frame be
// loaded while the previous one is still being decoded:
//   LOAD  accepting LLRs (in_ready = 1);
//   FULL  a whole frame is stored, frame_avail = 1 until the controller takes it;
//   BUSY  the decoder is using the channel LLRs; release returns to LOAD.
// The controller raises release once stage n-1 has read the channel words for
// the last time (after the g pass of stage n-1, i.e. in the second half of the
// decoding), which is the paper's argument for separate channel memories.
// The counters and states are this design's choice; the paper names the block
// and the overlap, not its logic. in_valid/in_ready is a plain valid/ready
// handshake: an LLR is taken in a cycle where both are 1.
module channel_buffer #(
  parameter int unsigned N   = 32768,
  parameter int unsigned P   = 64,
  parameter int unsigned QC  = 5,
  parameter int unsigned CAW = ((N / (2 * P)) <= 2) ? 1 : $clog2(N / (2 * P))
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [QC-1:0]        in_llr,
  output logic                 in_ready,
  output logic                 frame_avail,
  input  logic                 take,       // decoder starts on the stored frame
  input  logic                 release_ch, // decoder no longer needs it
  output logic                 we1,
  output logic                 we2,
  output logic [CAW-1:0]       waddr,
  output logic [P-1:0][QC-1:0] wdata
);

  localparam int unsigned LOGP  = $clog2(P);
  localparam int unsigned HALFW = N / (2 * P);   // words per channel SRAM

  typedef enum logic [1:0] {S_LOAD, S_FULL, S_BUSY} state_t;

  state_t                   state;
  logic [$clog2(N)-1:0]     cnt;       // index of the next LLR
  logic [P-2:0][QC-1:0]     lanes;     // lanes 0..P-2 of the word being built
  logic                     accept, word_done;
  logic [$clog2(N)-LOGP-1:0] widx;

  assign in_ready    = (state == S_LOAD);
  assign frame_avail = (state == S_FULL);
  assign accept      = in_valid && in_ready;
  assign word_done   = accept && (cnt[LOGP-1:0] == LOGP'(P - 1));
  assign widx        = cnt[$clog2(N)-1:LOGP];

  always_comb begin
    wdata = {in_llr, lanes};
    we1   = word_done && (widx < HALFW);
    we2   = word_done && (widx >= HALFW);
    waddr = (widx < HALFW) ? CAW'(widx) : CAW'(widx - HALFW);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOAD;
      cnt   <= '0;
      lanes <= '0;
    end else begin
      if (accept) begin
        lanes[cnt[LOGP-1:0]] <= in_llr;
        cnt <= cnt + 1'b1;
      end
      unique case (state)
        S_LOAD: if (accept && cnt == $clog2(N)'(N - 1)) state <= S_FULL;
        S_FULL: if (take) state <= S_BUSY;
        S_BUSY: if (release_ch) state <= S_LOAD;
        default: state <= S_LOAD;
      endcase
    end
  end

  // The controller only takes a stored frame and only releases a taken one.
  a_take: assert property (@(posedge clk) disable iff (!rst_n) take |-> state == S_FULL);
  a_rel:  assert property (@(posedge clk) disable iff (!rst_n) release_ch |-> state == S_BUSY);

endmodule
