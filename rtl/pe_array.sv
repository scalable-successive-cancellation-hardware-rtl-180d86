// pe_array -- the "Decoding PEs" block: P regular processing elements working
// on one word of P node pairs per cycle, plus the chained stage-0 PE.
//
// Operands come from one of two sources, selected by sel_ch:
//   * the two channel SRAMs (Qc-bit LLRs, sign-extended to Q bits), used only
//     by stage n-1;
//   * the two internal LLR SRAMs (Q-bit LLRs), used by every other stage.
// In both cases lane j takes operand a from lane j of SRAM 1 and operand b from
// lane j of SRAM 2; the concatenation of the two P-LLR words is the 2P-LLR
// operand word of the block diagram. The chained PE uses lane 0 of the internal
// operands (stage 1 leaves its two LLRs there). ps supplies one partial sum per
// lane for g. The operand multiplexer and sign extension follow the paper's
// Fig. 1; everything is combinational, registers live in the SRAMs.
module pe_array #(
  parameter int unsigned P  = 64,
  parameter int unsigned Q  = 8,
  parameter int unsigned QC = 5
) (
  input  logic                 sel_ch,   // 1: channel operands, 0: internal
  input  logic                 sel_g,    // 0: f, 1: g
  input  logic [P-1:0][QC-1:0] ch_a,
  input  logic [P-1:0][QC-1:0] ch_b,
  input  logic [P-1:0][Q-1:0]  in_a,
  input  logic [P-1:0][Q-1:0]  in_b,
  input  logic [P-1:0]         ps,
  input  logic [1:0]           frozen,
  output logic [P-1:0][Q-1:0]  y,
  output logic [1:0]           u,
  output logic [Q-1:0]         llr_f,
  output logic [Q-1:0]         llr_g
);

  for (genvar j = 0; j < P; j++) begin : g_lane
    logic signed [Q-1:0] opa, opb, res;
    assign opa = sel_ch ? Q'($signed(ch_a[j])) : $signed(in_a[j]);
    assign opb = sel_ch ? Q'($signed(ch_b[j])) : $signed(in_b[j]);
    decoding_pe #(.Q(Q)) u_pe (.a(opa), .b(opb), .sel_g, .s(ps[j]), .y(res));
    assign y[j] = res;
  end

  chained_pe #(.Q(Q)) u_chained (
    .a(in_a[0]), .b(in_b[0]), .frozen, .u, .llr_f(llr_f), .llr_g(llr_g)
  );

endmodule
