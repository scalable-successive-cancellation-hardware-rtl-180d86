// tb_decoding_pe -- self-checking testbench of decoding_pe.
//
// Applies every pair of Q-bit operands (Q = 5 here, so the sweep is
// exhaustive) to the PE in both modes and with both partial-sum values, and
// compares the result with the min-sum f and the g equation computed in
// integer arithmetic with symmetric saturation (polar_ref_pkg).
module tb_decoding_pe;
  import polar_ref_pkg::*;

  localparam int Q = 5;

  logic signed [Q-1:0] a, b, y;
  logic sel_g, s;
  int checks = 0, failures = 0;

  decoding_pe #(.Q(Q)) dut (.a, .b, .sel_g, .s, .y);

  initial begin
    for (int ia = -(1 << (Q - 1)); ia < (1 << (Q - 1)); ia++)
      for (int ib = -(1 << (Q - 1)); ib < (1 << (Q - 1)); ib++)
        for (int m = 0; m < 3; m++) begin
          int expv;
          a = Q'(ia);
          b = Q'(ib);
          sel_g = (m != 0);
          s = (m == 2);
          #1;
          expv = (m == 0) ? ref_f(ia, ib, Q) : ref_g(s, ia, ib, Q);
          checks++;
          if (int'(y) != expv) begin
            failures++;
            if (failures < 10) $display("FAIL: a=%0d b=%0d mode=%0d y=%0d expected %0d", ia, ib, m, y, expv);
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
