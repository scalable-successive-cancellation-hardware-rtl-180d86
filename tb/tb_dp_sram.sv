// tb_dp_sram -- self-checking testbench of dp_sram.
//
// Random writes and reads against a software copy of the memory. The read
// address is sampled on the clock edge and the data are checked one cycle
// later; a read of the address written on the same edge must return the old
// contents (the memory has no forwarding).
module tb_dp_sram;
  localparam int W = 20;
  localparam int D = 16;
  localparam int AW = 4;

  logic clk = 1'b0;
  logic we = 1'b0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [W-1:0] wdata = '0, rdata;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  dp_sram #(.WIDTH(W), .DEPTH(D), .AW(AW)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  logic [W-1:0] model [D];

  initial begin
    logic [W-1:0] exp_data;
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      we = 1'b1; waddr = AW'(i); wdata = W'($urandom);
      model[i] = wdata;
    end
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      we = 1'($urandom);
      waddr = AW'($urandom);
      wdata = W'($urandom);
      raddr = ($urandom_range(3) == 0) ? waddr : AW'($urandom);
      exp_data = model[raddr];          // old contents on a same-edge write
      if (we) model[waddr] = wdata;
      @(posedge clk);
      #1;
      checks++;
      if (rdata != exp_data) begin
        failures++;
        if (failures < 10) $display("FAIL: t=%0d raddr=%0d rdata=%h expected %h", t, raddr, rdata, exp_data);
      end
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
