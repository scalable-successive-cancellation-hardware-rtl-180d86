// ps_encoder -- datapath of the semi-parallel partial-sum encoder.
//
// Partial sums are produced by re-encoding the decided bits with the polar
// transform, whose nodes are XOR (f-hat) and pass-through (g-hat). Encoder
// stage e merges two already-encoded neighbouring blocks of 2^e bits, L (the
// earlier block) and R (the later one), into the encoding of their
// concatenation, 2^(e+1) bits:
//     out[j]       = L[j] xor R[j]      j < 2^e
//     out[j + 2^e] = R[j]
// Stage 0 takes its two single-bit blocks straight from the chained PE
// (u_i, u_(i+1)). The node equations and the stage-by-stage merging follow
// the paper (its Sec. III-D and Fig. 2).
//
// One output word of P partial sums is produced per cycle:
//   * small stage (2^(e+1) <= P, one cycle): out = (R << 2^e) | (L xor R);
//   * large stage (2^(e+1)/P cycles): the first half of the cycles output
//     L xor R word by word, the second half output R word by word.
// Words are kept in natural index order, so a g stage reads its P partial sums
// as one aligned word. The paper's encoder uses P/2 encoding PEs that each emit
// an XOR and a pass-through value; producing whole output words instead (P XOR
// lanes, the same number of cycles) is this design's choice, made so that
// every write is one aligned word. Combinational.
module ps_encoder #(
  parameter int unsigned P    = 64,
  parameter int unsigned LOGP = $clog2(P),
  parameter int unsigned SW   = 5            // width of the stage index
) (
  input  logic [SW-1:0] stage,     // encoder stage e
  input  logic          half,      // large stage: 0 = XOR words, 1 = copy words
  input  logic [1:0]    u,         // decided bits u_i, u_(i+1), used when e = 0
  input  logic [P-1:0]  l_word,    // word of the earlier block L
  input  logic [P-1:0]  r_word,    // word of the later block R
  output logic [P-1:0]  out
);

  logic [P-1:0] lw, rw, mask;
  int unsigned  h;

  always_comb begin
    if (stage == '0) begin
      lw = P'(u[0]);
      rw = P'(u[1]);
    end else begin
      lw = l_word;
      rw = r_word;
    end
    h    = 1 << stage;
    mask = '0;
    for (int unsigned j = 0; j < P; j++) mask[j] = (j < h);
    if (int'(stage) < int'(LOGP)) begin
      out = ((rw & mask) << h) | ((lw ^ rw) & mask);
    end else begin
      out = half ? rw : (lw ^ rw);
    end
  end

endmodule
