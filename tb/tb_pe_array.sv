// tb_pe_array -- self-checking testbench of pe_array (P = 8, Q = 8, Qc = 5).
//
// Random operand words from both sources and both modes. Each lane's result
// is compared with the f or g equation applied to (SRAM 1 lane j, SRAM 2 lane
// j), with channel LLRs sign-extended from Qc to Q bits, and with lane j's
// partial sum for g. The chained PE outputs are compared with f, the first
// decision, g and the second decision on lane 0 of the internal operands.
module tb_pe_array;
  import polar_ref_pkg::*;

  localparam int P = 8, Q = 8, QC = 5;

  logic sel_ch, sel_g;
  logic [P-1:0][QC-1:0] ch_a, ch_b;
  logic [P-1:0][Q-1:0] in_a, in_b, y;
  logic [P-1:0] ps;
  logic [1:0] frozen, u;
  logic [Q-1:0] llr_f, llr_g;
  int checks = 0, failures = 0;

  pe_array #(.P(P), .Q(Q), .QC(QC)) dut (.sel_ch, .sel_g, .ch_a, .ch_b, .in_a, .in_b, .ps, .frozen, .y, .u, .llr_f, .llr_g);

  initial begin
    for (int t = 0; t < 500; t++) begin
      int ef, eg;
      bit u0, u1;
      sel_ch = 1'($urandom);
      sel_g = 1'($urandom);
      frozen = 2'($urandom);
      ps = P'($urandom);
      for (int j = 0; j < P; j++) begin
        ch_a[j] = QC'($urandom);
        ch_b[j] = QC'($urandom);
        in_a[j] = Q'($urandom_range(254) - 127);
        in_b[j] = Q'($urandom_range(254) - 127);
      end
      #1;
      for (int j = 0; j < P; j++) begin
        int a, b, e;
        a = sel_ch ? int'($signed(ch_a[j])) : int'($signed(in_a[j]));
        b = sel_ch ? int'($signed(ch_b[j])) : int'($signed(in_b[j]));
        e = sel_g ? ref_g(ps[j], a, b, Q) : ref_f(a, b, Q);
        checks++;
        if (int'($signed(y[j])) != e) begin
          failures++;
          if (failures < 10) $display("FAIL: t=%0d lane %0d y=%0d expected %0d", t, j, $signed(y[j]), e);
        end
      end
      ef = ref_f(int'($signed(in_a[0])), int'($signed(in_b[0])), Q);
      u0 = frozen[0] ? 1'b0 : (ef < 0);
      eg = ref_g(u0, int'($signed(in_a[0])), int'($signed(in_b[0])), Q);
      u1 = frozen[1] ? 1'b0 : (eg < 0);
      checks++;
      if (int'($signed(llr_f)) != ef || int'($signed(llr_g)) != eg || u != {u1, u0}) begin
        failures++;
        if (failures < 10) $display("FAIL: t=%0d chained PE", t);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
