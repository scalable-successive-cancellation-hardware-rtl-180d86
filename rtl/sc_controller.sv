// sc_controller -- schedule of the semi-parallel SC decoder.
//
// The decoder walks the SC tree one pair of bits at a time. For pair p
// (bits u_2p, u_2p+1):
//   1. f/g passes on stages l = top..1, where top = n-1 for p = 0 and
//      top = tz(p)+1 otherwise (tz = number of trailing zero bits); the first
//      pass after an encoder run is a g pass, all later ones are f passes.
//      Stage l takes max(1, 2^l / P) cycles, one word of P nodes per cycle.
//   2. one cycle on the chained PE (stage 0), which outputs two bits;
//   3. encoder stages e = 0, 1, ... while the block of 2^(e+1) bits that ends
//      at pair p is complete, max(1, 2^(e+1) / P) cycles each. No encoder stage
//      runs after the last pair of a frame.
// This reproduces the paper's schedule table for N = 8, P = 2 cycle by cycle,
// and its decoding latency N/P (5P/2 - 1) + 2N/P log2(N/4P) - log2 P + 2.
//
// The current operation is held in registers (cur); the next one (nxt) is
// computed combinationally and drives the read addresses of all memories,
// because every memory has a one-cycle registered read: data for the operation
// executed in cycle t are addressed in cycle t-1. Write controls come from cur.
// After the last pair the controller starts the next frame at once if one is
// stored, so frames are decoded back to back. It releases the channel memory
// after the last read of stage n-1 (its g pass), letting the channel buffer
// load the next frame during the second half of the decoding.
// The schedule follows the paper's Table III; the state encoding, the memory
// map (polar_pkg) and the start/release handshake are this design's.
module sc_controller
  import polar_pkg::*;
#(
  parameter int unsigned N   = 32768,
  parameter int unsigned P   = 64,
  parameter int unsigned LOGN = $clog2(N),
  parameter int unsigned LOGP = $clog2(P),
  parameter int unsigned SW   = $clog2(LOGN) + 1,
  parameter int unsigned PW   = LOGN - 1,
  parameter int unsigned CAW  = aw(N / (2 * P)),
  parameter int unsigned LAW  = aw(llr_depth(LOGN, P)),
  parameter int unsigned AAW  = aw(ps_base(LOGN, P)),
  parameter int unsigned BAW  = aw(ps_base(LOGN - 1, P))
) (
  input  logic            clk,
  input  logic            rst_n,
  // channel memory hand-off
  input  logic            frame_avail,
  output logic            take,
  output logic            release_ch,
  // channel SRAM read
  output logic [CAW-1:0]  ch_raddr,
  // internal LLR SRAMs
  output logic [LAW-1:0]  llr_raddr,
  output logic            llr_we1,
  output logic            llr_we2,
  output logic [LAW-1:0]  llr_waddr,
  output logic [LOGP-1:0] llr_shift,     // lanes SRAM 2 data are shifted down
  // decoding PEs
  output logic            pe_sel_ch,
  output logic            pe_sel_g,
  // partial-sum SRAMs and encoder
  output logic [AAW-1:0]  psa_raddr,
  output logic [BAW-1:0]  psb_raddr,
  output logic            psa_we,
  output logic            psb_we,
  output logic [AAW-1:0]  ps_waddr,
  output logic [SW-1:0]   enc_stage,
  output logic            enc_half,
  // frozen-bit ROM and decoded bits
  output logic [PW-1:0]   rom_raddr,
  output logic            fg_valid,      // chained PE decides a pair this cycle
  output logic [PW-1:0]   pair,          // index of that pair
  output logic            frame_last,    // ... and it is the frame's last pair
  output logic            busy
);

  localparam int unsigned NP = N / 2;   // pairs per frame

  typedef struct packed {
    phase_t        ph;
    logic          g;     // DEC: g pass
    logic [SW-1:0] stg;   // DEC: stage l, ENC: encoder stage e
    logic [PW-1:0] k;     // word within the pass
    logic [PW-1:0] p;     // pair index
  } op_t;

  op_t cur, nxt;

  // Base addresses of every region, as constants.
  logic [LAW-1:0] lbase [LOGN+1];
  logic [AAW-1:0] abase [LOGN+1];
  logic [BAW-1:0] bbase [LOGN+1];
  for (genvar l = 0; l <= LOGN; l++) begin : g_base
    assign lbase[l] = LAW'(llr_base(l, P));
    assign abase[l] = AAW'(ps_base(l, P));
    assign bbase[l] = BAW'(ps_base(l, P));
  end

  // Cycles of a decoding pass on stage l and of encoder stage e.
  function automatic logic [PW-1:0] dec_cycles(logic [SW-1:0] l);
    return (int'(l) > int'(LOGP)) ? PW'(1) << (l - SW'(LOGP)) : PW'(1);
  endfunction
  function automatic logic [PW-1:0] enc_cycles(logic [SW-1:0] e);
    return (int'(e) + 1 > int'(LOGP)) ? PW'(1) << (e + 1'b1 - SW'(LOGP)) : PW'(1);
  endfunction

  logic [PW-1:0] cur_len;
  logic          cur_end;

  // ---------------- next-operation logic ----------------
  always_comb begin
    nxt     = cur;
    take    = 1'b0;
    cur_len = (cur.ph == PH_ENC) ? enc_cycles(cur.stg) : dec_cycles(cur.stg);
    cur_end = (cur.k == cur_len - 1'b1);
    unique case (cur.ph)
      PH_IDLE: begin
        if (frame_avail) begin
          take = 1'b1;
          nxt  = '{ph: PH_DEC, g: 1'b0, stg: SW'(LOGN - 1), k: '0, p: '0};
        end
      end
      PH_DEC: begin
        if (!cur_end) nxt.k = cur.k + 1'b1;
        else if (cur.stg > SW'(1)) begin
          nxt.stg = cur.stg - 1'b1;
          nxt.g   = 1'b0;
          nxt.k   = '0;
        end else begin
          nxt.ph = PH_FG;
          nxt.k  = '0;
        end
      end
      PH_FG: begin
        if (cur.p == PW'(NP - 1)) begin
          if (frame_avail) begin
            take = 1'b1;
            nxt  = '{ph: PH_DEC, g: 1'b0, stg: SW'(LOGN - 1), k: '0, p: '0};
          end else begin
            nxt = '{ph: PH_IDLE, g: 1'b0, stg: '0, k: '0, p: '0};
          end
        end else begin
          nxt.ph  = PH_ENC;
          nxt.stg = '0;
          nxt.k   = '0;
        end
      end
      PH_ENC: begin
        if (!cur_end) nxt.k = cur.k + 1'b1;
        else if (cur.p[cur.stg] && int'(cur.stg) < int'(LOGN) - 2) begin
          nxt.stg = cur.stg + 1'b1;
          nxt.k   = '0;
        end else begin
          nxt.ph  = PH_DEC;
          nxt.g   = 1'b1;
          nxt.stg = cur.stg + 1'b1;
          nxt.k   = '0;
          nxt.p   = cur.p + 1'b1;
        end
      end
      default: nxt = cur;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cur <= '{ph: PH_IDLE, g: 1'b0, stg: '0, k: '0, p: '0};
    else        cur <= nxt;
  end

  // ---------------- read addresses (from nxt) ----------------
  logic [PW-1:0] nlen;
  logic          nhalf;
  logic [PW-1:0] nk_r;   // word of R in the encoder
  always_comb begin
    nlen      = enc_cycles(nxt.stg);
    nhalf     = (nlen > PW'(1)) && (nxt.k >= (nlen >> 1));
    nk_r      = nhalf ? nxt.k - (nlen >> 1) : nxt.k;
    ch_raddr  = CAW'(nxt.k);
    llr_raddr = (nxt.ph == PH_FG) ? lbase[1] : lbase[nxt.stg + 1'b1] + LAW'(nxt.k);
    psa_raddr = abase[nxt.stg] + AAW'(nxt.k);
    psb_raddr = bbase[nxt.stg] + BAW'(nk_r);
    rom_raddr = nxt.p;
  end

  // ---------------- write and datapath controls (from cur) ----------------
  logic [PW-1:0] half_len;
  logic          dhalf;
  always_comb begin
    half_len   = cur_len >> 1;
    dhalf      = (int'(cur.stg) > int'(LOGP)) && (cur.k >= half_len);
    llr_we1    = 1'b0;
    llr_we2    = 1'b0;
    llr_waddr  = lbase[cur.stg];
    llr_shift  = '0;
    psa_we     = 1'b0;
    psb_we     = 1'b0;
    ps_waddr   = abase[cur.stg + 1'b1] + AAW'(cur.k);
    pe_sel_ch  = (cur.ph == PH_DEC) && (cur.stg == SW'(LOGN - 1));
    pe_sel_g   = cur.g;
    enc_stage  = cur.stg;
    enc_half   = (cur_len > PW'(1)) && (cur.k >= half_len);
    release_ch = (cur.ph == PH_DEC) && cur.g && (cur.stg == SW'(LOGN - 1)) && cur_end;
    if (cur.ph == PH_DEC) begin
      if (int'(cur.stg) <= int'(LOGP)) begin
        // whole stage output in one word: halves go to both SRAMs at once
        llr_we1   = 1'b1;
        llr_we2   = 1'b1;
        llr_shift = LOGP'(1 << (cur.stg - 1'b1));
      end else begin
        llr_we1   = !dhalf;
        llr_we2   = dhalf;
        llr_waddr = lbase[cur.stg] + LAW'(dhalf ? cur.k - half_len : cur.k);
      end
    end
    if (cur.ph == PH_ENC) begin
      // block of encoder stage e is a left child (-> A, for g of stage e+1)
      // or a right child (-> B, for encoder stage e+1)
      psa_we = !cur.p[cur.stg];
      psb_we = cur.p[cur.stg];
      if (cur.p[cur.stg]) ps_waddr = AAW'(bbase[cur.stg + 1'b1]) + AAW'(cur.k);
    end
  end

  assign fg_valid   = (cur.ph == PH_FG);
  assign pair       = cur.p;
  assign frame_last = (cur.p == PW'(NP - 1));
  assign busy       = (cur.ph != PH_IDLE);

endmodule
