// tb_frozen_rom -- self-checking testbench of frozen_rom.
//
// Reads every pair address of a 256-bit ROM (polarization-weight threshold
// 32486, a rate-1/2 code) and compares the two flags, one cycle after the
// address, with the rule evaluated in software with real arithmetic. Also
// checks the number of information bits (the code dimension): 128 of 256.
module tb_frozen_rom;
  import polar_ref_pkg::*;

  localparam int N = 256;
  localparam int FW = 32486;
  localparam int AW = 7;

  logic clk = 1'b0;
  logic [AW-1:0] raddr = '0;
  logic [1:0] frozen;
  int checks = 0, failures = 0, info = 0;

  always #5 clk = ~clk;

  frozen_rom #(.N(N), .PW_THRESHOLD(FW), .AW(AW)) dut (.clk, .raddr, .frozen);

  initial begin
    for (int p = 0; p < N / 2; p++) begin
      @(negedge clk);
      raddr = AW'(p);
      @(posedge clk);
      #1;
      checks++;
      if (frozen != {is_frozen(2 * p + 1, FW), is_frozen(2 * p, FW)}) begin
        failures++;
        if (failures < 10) $display("FAIL: pair %0d flags %b", p, frozen);
      end
      info += (frozen[0] ? 0 : 1) + (frozen[1] ? 0 : 1);
    end
    checks++;
    if (info != 128) begin
      failures++;
      $display("FAIL: %0d information bits, expected 128", info);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
