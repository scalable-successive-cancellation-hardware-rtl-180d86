// tb_workloads_long -- the code-length sweep of the architecture's
// implementation results, P = 64: N = 2^16, 2^18 and 2^20 with quantization
// (6,4,0), and N = 2^17 with (5,5,0). Each configuration is a polar_bench
// instance decoding one noiseless frame (a rate-1/2 code set through the
// ROM's polarization-weight threshold); all run in parallel and every decided bit and the latency of
// every frame are checked.
module tb_workloads_long;
  localparam int NB = 4;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic done [NB];
  int c [NB];
  int f [NB];

  polar_bench #(.N(65536),   .P(64), .QI(6), .QIC(4), .QF(0), .FW(162362),  .NF(1)) b0 (.clk, .done(done[0]), .checks(c[0]), .failures(f[0]));
  polar_bench #(.N(131072),  .P(64), .QI(5), .QIC(5), .QF(0), .FW(195130),  .NF(1)) b1 (.clk, .done(done[1]), .checks(c[1]), .failures(f[1]));
  polar_bench #(.N(262144),  .P(64), .QI(6), .QIC(4), .QF(0), .FW(234098),  .NF(1)) b2 (.clk, .done(done[2]), .checks(c[2]), .failures(f[2]));
  polar_bench #(.N(1048576), .P(64), .QI(6), .QIC(4), .QF(0), .FW(335548), .NF(1)) b3 (.clk, .done(done[3]), .checks(c[3]), .failures(f[3]));

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
    repeat (5000000) @(posedge clk);
    $display("FAIL: watchdog");
    report(1'b1);
  end
endmodule
