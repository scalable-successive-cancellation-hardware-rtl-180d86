// tb_sram_bypass -- self-checking testbench of sram_bypass.
//
// Random writes and reads, with many reads of the address written on the same
// clock edge, against a software copy of the memory. The expected read data
// is the contents after the write of that edge (the bypass must hide the
// one-cycle write-to-read hazard), and bypass_hit must be set exactly for such
// reads. Read data appear one cycle after the address.
module tb_sram_bypass;
  localparam int W = 16;
  localparam int D = 8;
  localparam int AW = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  logic we = 1'b0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [W-1:0] wdata = '0, rdata;
  logic bypass_hit;
  int checks = 0, failures = 0, hits = 0;

  always #5 clk = ~clk;

  sram_bypass #(.WIDTH(W), .DEPTH(D), .AW(AW)) dut (.clk, .rst_n, .we, .waddr, .wdata, .raddr, .rdata, .bypass_hit);

  logic [W-1:0] model [D];

  initial begin
    logic [W-1:0] exp_data;
    logic exp_hit;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // fill the memory first
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      we = 1'b1; waddr = AW'(i); wdata = W'($urandom); raddr = '0;
      model[i] = wdata;
    end
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      we = 1'($urandom);
      waddr = AW'($urandom);
      wdata = W'($urandom);
      raddr = ($urandom_range(1) == 1) ? waddr : AW'($urandom);
      exp_hit = we && (waddr == raddr);
      if (we) model[waddr] = wdata;
      exp_data = model[raddr];
      @(posedge clk);
      #1;
      checks++;
      if (rdata != exp_data || bypass_hit != exp_hit) begin
        failures++;
        if (failures < 10) $display("FAIL: t=%0d rdata=%h expected %h hit=%0b expected %0b", t, rdata, exp_data, bypass_hit, exp_hit);
      end
      if (exp_hit) hits++;
    end
    checks++;
    if (hits == 0) begin
      failures++;
      $display("FAIL: no bypass read exercised");
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
