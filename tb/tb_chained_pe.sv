// tb_chained_pe -- self-checking testbench of chained_pe.
//
// Sweeps every pair of Q-bit operands (Q = 5) and every combination of the two
// frozen flags, and checks the two LLRs and the two decided bits against a
// step-by-step evaluation of f, the first decision, g with that decision, and
// the second decision (polar_ref_pkg arithmetic).
module tb_chained_pe;
  import polar_ref_pkg::*;

  localparam int Q = 5;

  logic signed [Q-1:0] a, b, llr_f, llr_g;
  logic [1:0] frozen, u;
  int checks = 0, failures = 0;

  chained_pe #(.Q(Q)) dut (.a, .b, .frozen, .u, .llr_f, .llr_g);

  initial begin
    for (int ia = -(1 << (Q - 1)); ia < (1 << (Q - 1)); ia++)
      for (int ib = -(1 << (Q - 1)); ib < (1 << (Q - 1)); ib++)
        for (int fz = 0; fz < 4; fz++) begin
          int ef, eg;
          bit u0, u1;
          a = Q'(ia);
          b = Q'(ib);
          frozen = 2'(fz);
          #1;
          ef = ref_f(ia, ib, Q);
          u0 = frozen[0] ? 1'b0 : (ef < 0);
          eg = ref_g(u0, ia, ib, Q);
          u1 = frozen[1] ? 1'b0 : (eg < 0);
          checks++;
          if (int'(llr_f) != ef || int'(llr_g) != eg || u != {u1, u0}) begin
            failures++;
            if (failures < 10)
              $display("FAIL: a=%0d b=%0d frz=%0d got f=%0d g=%0d u=%b expected f=%0d g=%0d u=%b%b",
                       ia, ib, fz, llr_f, llr_g, u, ef, eg, u1, u0);
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
