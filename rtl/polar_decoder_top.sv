// polar_decoder_top -- semi-parallel successive-cancellation (SC) decoder for
// polar codes of length N = 2^n with P processing elements.
//
// Data flow (the paper's Fig. 1):
//   channel LLRs (Qc bits, one per cycle) -> channel_buffer -> channel SRAM 1
//   (first half of the frame) and channel SRAM 2 (second half) -> operand
//   multiplexer -> P decoding PEs (stage n-1 .. 1) and the chained stage-0 PE
//   -> LLR SRAM 1/2 (internal LLRs, Q bits, with bypass) -> back to the PEs.
//   The chained PE emits two decided bits per visit (u_out, with their LLRs on
//   llr_out); they feed the semi-parallel partial-sum encoder, whose output
//   words go to the two partial-sum SRAMs; the g passes read their partial
//   sums from partial-sum SRAM A. The frozen-bit ROM gives the frozen flags of
//   each pair. sc_controller sequences everything.
//
// Interface: in_valid/in_llr/in_ready is a valid/ready stream of channel LLRs,
// frame after frame, in natural order (LLR of code bit 0 first). Decoding of a
// stored frame starts by itself. For each pair of bits one cycle of u_valid
// presents u_out[0] = u_i, u_out[1] = u_(i+1) with i = 2*u_pair, and their
// stage-0 LLRs on llr_out; u_last marks the frame's last pair. A new frame may
// be streamed in while the previous one is still in its second half.
// Latency from the first operation of a frame to its last pair is
// N/P (5P/2 - 1) + 2N/P log2(N/4P) - log2 P + 2 cycles (88 572 at the
// defaults), one cycle more to u_valid because the outputs are registered.
//
// Parameters take the paper's main numbers: N = 2^15, P = 64 and the (6,3,2)
// quantization of its rate-1/2 code, i.e. Q = QI + QF = 8-bit internal and
// QC = QIC + QF = 5-bit channel LLRs with QF fractional bits in both.
module polar_decoder_top
  import polar_pkg::*;
#(
  parameter int unsigned N             = 32768,
  parameter int unsigned P             = 64,
  parameter int unsigned QI            = 6,
  parameter int unsigned QIC           = 3,
  parameter int unsigned QF            = 2,
  parameter int unsigned PW_THRESHOLD  = 134807,
  parameter int unsigned Q             = QI + QF,
  parameter int unsigned QC            = QIC + QF
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [QC-1:0]       in_llr,
  output logic                in_ready,
  output logic                u_valid,
  output logic [1:0]          u_out,
  output logic [$clog2(N)-2:0] u_pair,
  output logic                u_last,
  output logic [1:0][Q-1:0]   llr_out,
  output logic                busy
);

  localparam int unsigned LOGN = $clog2(N);
  localparam int unsigned LOGP = $clog2(P);
  localparam int unsigned SW   = $clog2(LOGN) + 1;
  localparam int unsigned PW   = LOGN - 1;
  localparam int unsigned CD   = N / (2 * P);
  localparam int unsigned LD   = llr_depth(LOGN, P);
  localparam int unsigned AD   = ps_base(LOGN, P);
  localparam int unsigned BD   = ps_base(LOGN - 1, P);
  localparam int unsigned CAW  = aw(CD);
  localparam int unsigned LAW  = aw(LD);
  localparam int unsigned AAW  = aw(AD);
  localparam int unsigned BAW  = aw(BD);

  // ---------------- controller ----------------
  logic            frame_avail, take, release_ch;
  logic [CAW-1:0]  ch_raddr;
  logic [LAW-1:0]  llr_raddr, llr_waddr;
  logic            llr_we1, llr_we2;
  logic [LOGP-1:0] llr_shift;
  logic            pe_sel_ch, pe_sel_g;
  logic [AAW-1:0]  psa_raddr, ps_waddr;
  logic [BAW-1:0]  psb_raddr;
  logic            psa_we, psb_we;
  logic [SW-1:0]   enc_stage;
  logic            enc_half;
  logic [PW-1:0]   rom_raddr, pair;
  logic            fg_valid, frame_last;

  sc_controller #(.N(N), .P(P)) u_ctrl (
    .clk, .rst_n, .frame_avail, .take, .release_ch, .ch_raddr,
    .llr_raddr, .llr_we1, .llr_we2, .llr_waddr, .llr_shift,
    .pe_sel_ch, .pe_sel_g, .psa_raddr, .psb_raddr, .psa_we, .psb_we, .ps_waddr,
    .enc_stage, .enc_half, .rom_raddr, .fg_valid, .pair, .frame_last, .busy
  );

  // ---------------- channel buffer and channel SRAMs ----------------
  logic                 ch_we1, ch_we2;
  logic [CAW-1:0]       ch_waddr;
  logic [P-1:0][QC-1:0] ch_wdata, ch_a, ch_b;

  channel_buffer #(.N(N), .P(P), .QC(QC), .CAW(CAW)) u_chbuf (
    .clk, .rst_n, .in_valid, .in_llr, .in_ready, .frame_avail,
    .take, .release_ch, .we1(ch_we1), .we2(ch_we2), .waddr(ch_waddr), .wdata(ch_wdata)
  );

  dp_sram #(.WIDTH(P * QC), .DEPTH(CD), .AW(CAW)) u_ch_sram1 (
    .clk, .we(ch_we1), .waddr(ch_waddr), .wdata(ch_wdata), .raddr(ch_raddr), .rdata(ch_a)
  );
  dp_sram #(.WIDTH(P * QC), .DEPTH(CD), .AW(CAW)) u_ch_sram2 (
    .clk, .we(ch_we2), .waddr(ch_waddr), .wdata(ch_wdata), .raddr(ch_raddr), .rdata(ch_b)
  );

  // ---------------- decoding PEs ----------------
  logic [P-1:0][Q-1:0] in_a, in_b, pe_y, llr_wdata2;
  logic [P-1:0]        psa_rdata, psb_rdata, ps_wdata;
  logic [1:0]          frozen, u_dec;
  logic [Q-1:0]        llr_f, llr_g;

  pe_array #(.P(P), .Q(Q), .QC(QC)) u_pes (
    .sel_ch(pe_sel_ch), .sel_g(pe_sel_g), .ch_a, .ch_b, .in_a, .in_b,
    .ps(psa_rdata), .frozen, .y(pe_y), .u(u_dec), .llr_f, .llr_g
  );

  frozen_rom #(.N(N), .PW_THRESHOLD(PW_THRESHOLD), .AW(PW)) u_rom (
    .clk, .raddr(rom_raddr), .frozen
  );

  // ---------------- internal LLR SRAMs ----------------
  // SRAM 2 receives the upper half of a one-word stage output moved down to
  // lane 0, so that operand b always sits in the same lane as operand a.
  assign llr_wdata2 = pe_y >> (Q * int'(llr_shift));

  logic llr_byp1, llr_byp2;
  sram_bypass #(.WIDTH(P * Q), .DEPTH(LD), .AW(LAW)) u_llr_sram1 (
    .clk, .rst_n, .we(llr_we1), .waddr(llr_waddr), .wdata(pe_y),
    .raddr(llr_raddr), .rdata(in_a), .bypass_hit(llr_byp1)
  );
  sram_bypass #(.WIDTH(P * Q), .DEPTH(LD), .AW(LAW)) u_llr_sram2 (
    .clk, .rst_n, .we(llr_we2), .waddr(llr_waddr), .wdata(llr_wdata2),
    .raddr(llr_raddr), .rdata(in_b), .bypass_hit(llr_byp2)
  );

  // ---------------- partial-sum encoder and SRAMs ----------------
  logic [1:0] u_q;   // pair decided in the previous cycle, for encoder stage 0
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        u_q <= '0;
    else if (fg_valid) u_q <= u_dec;
  end

  ps_encoder #(.P(P), .LOGP(LOGP), .SW(SW)) u_enc (
    .stage(enc_stage), .half(enc_half), .u(u_q),
    .l_word(psa_rdata), .r_word(psb_rdata), .out(ps_wdata)
  );

  logic psa_byp, psb_byp;
  sram_bypass #(.WIDTH(P), .DEPTH(AD), .AW(AAW)) u_ps_sram_a (
    .clk, .rst_n, .we(psa_we), .waddr(ps_waddr), .wdata(ps_wdata),
    .raddr(psa_raddr), .rdata(psa_rdata), .bypass_hit(psa_byp)
  );
  sram_bypass #(.WIDTH(P), .DEPTH(BD), .AW(BAW)) u_ps_sram_b (
    .clk, .rst_n, .we(psb_we), .waddr(BAW'(ps_waddr)), .wdata(ps_wdata),
    .raddr(psb_raddr), .rdata(psb_rdata), .bypass_hit(psb_byp)
  );

  // ---------------- decoded-bit output ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      u_valid <= 1'b0;
      u_out   <= '0;
      u_pair  <= '0;
      u_last  <= 1'b0;
      llr_out <= '0;
    end else begin
      u_valid <= fg_valid;
      if (fg_valid) begin
        u_out   <= u_dec;
        u_pair  <= pair;
        u_last  <= frame_last;
        llr_out <= {llr_g, llr_f};
      end
    end
  end

endmodule
