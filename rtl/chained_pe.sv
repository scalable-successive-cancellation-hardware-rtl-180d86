// chained_pe -- the stage-0 processing element that evaluates f, decides bit
// u_i, evaluates g with that decision and decides bit u_(i+1), all in one
// clock cycle, so that each visit of stage 0 yields two decoded bits.
//
// Stage 0 is always visited twice in a row with the same operands (first f,
// then g); chaining the two is the paper's idea. Hard decisions follow the
// usual rule: a frozen bit is 0, otherwise the bit is 1 when its LLR is
// negative and 0 when it is zero or positive (the tie rule is this design's
// choice). The two stage-0 LLRs are also brought out (llr_out), as in the
// paper's block diagram. Purely combinational; two decoding_pe instances.
module chained_pe #(
  parameter int unsigned Q = 8
) (
  input  logic signed [Q-1:0] a,
  input  logic signed [Q-1:0] b,
  input  logic [1:0]          frozen,   // [0]: u_i frozen, [1]: u_(i+1) frozen
  output logic [1:0]          u,        // [0]: u_i, [1]: u_(i+1)
  output logic signed [Q-1:0] llr_f,    // LLR of u_i
  output logic signed [Q-1:0] llr_g     // LLR of u_(i+1)
);

  decoding_pe #(.Q(Q)) u_f (.a, .b, .sel_g(1'b0), .s(1'b0), .y(llr_f));
  assign u[0] = frozen[0] ? 1'b0 : llr_f[Q-1];

  decoding_pe #(.Q(Q)) u_g (.a, .b, .sel_g(1'b1), .s(u[0]), .y(llr_g));
  assign u[1] = frozen[1] ? 1'b0 : llr_g[Q-1];

endmodule
