// tb_workloads_n15 -- the N = 2^15, P = 64 configurations of the decoder
// evaluated in the architecture's implementation results: the four codes of
// different rate with their quantizations (6,3,2), (6,3,2), (6,4,1), (6,4,0),
// and the quantization sweeps (7,4,0), (8,4,0), (9,4,0), (7,3,0), (7,5,0),
// (5,5,0). Rates 0.25, 0.50, 0.75, 0.90 are set through the ROM's
// polarization-weight threshold (164791, 134807, 104823, 78896); the sweeps
// use the rate-1/2 code. Each configuration is
// a polar_bench instance decoding two frames back to back; all run in
// parallel and every decided bit and every latency is checked.
module tb_workloads_n15;
  localparam int NB = 10;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic done [NB];
  int c [NB];
  int f [NB];

  polar_bench #(.N(32768), .P(64), .QI(6), .QIC(3), .QF(2), .FW(164791)) b0 (.clk, .done(done[0]), .checks(c[0]), .failures(f[0]));
  polar_bench #(.N(32768), .P(64), .QI(6), .QIC(3), .QF(2), .FW(134807)) b1 (.clk, .done(done[1]), .checks(c[1]), .failures(f[1]));
  polar_bench #(.N(32768), .P(64), .QI(6), .QIC(4), .QF(1), .FW(104823)) b2 (.clk, .done(done[2]), .checks(c[2]), .failures(f[2]));
  polar_bench #(.N(32768), .P(64), .QI(6), .QIC(4), .QF(0), .FW(78896)) b3 (.clk, .done(done[3]), .checks(c[3]), .failures(f[3]));
  polar_bench #(.N(32768), .P(64), .QI(7), .QIC(4), .QF(0), .FW(134807)) b4 (.clk, .done(done[4]), .checks(c[4]), .failures(f[4]));
  polar_bench #(.N(32768), .P(64), .QI(8), .QIC(4), .QF(0), .FW(134807)) b5 (.clk, .done(done[5]), .checks(c[5]), .failures(f[5]));
  polar_bench #(.N(32768), .P(64), .QI(9), .QIC(4), .QF(0), .FW(134807)) b6 (.clk, .done(done[6]), .checks(c[6]), .failures(f[6]));
  polar_bench #(.N(32768), .P(64), .QI(7), .QIC(3), .QF(0), .FW(134807)) b7 (.clk, .done(done[7]), .checks(c[7]), .failures(f[7]));
  polar_bench #(.N(32768), .P(64), .QI(7), .QIC(5), .QF(0), .FW(134807)) b8 (.clk, .done(done[8]), .checks(c[8]), .failures(f[8]));
  polar_bench #(.N(32768), .P(64), .QI(5), .QIC(5), .QF(0), .FW(134807)) b9 (.clk, .done(done[9]), .checks(c[9]), .failures(f[9]));

  function automatic bit all_done();
    for (int i = 0; i < NB; i++) if (!done[i]) return 1'b0;
    return 1'b1;
  endfunction

  task automatic report(bit timeout);
    int checks, failures;
    checks = 0;
    failures = timeout ? 1 : 0;
    for (int i = 0; i < NB; i++) begin
      checks += c[i];
      failures += f[i];
      if (!done[i]) begin
        failures++;
        $display("FAIL: configuration %0d did not finish", i);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    @(posedge clk);
    while (!all_done()) @(posedge clk);
    report(1'b0);
  end

  initial begin
    repeat (400000) @(posedge clk);
    $display("FAIL: watchdog");
    report(1'b1);
  end
endmodule
