// tb_channel_buffer -- self-checking testbench of channel_buffer (N = 64,
// P = 4, 5-bit LLRs).
//
// Streams two frames of random LLRs with random gaps in in_valid. Every word
// write is checked against the LLRs sent: lanes in arrival order, first half of
// the frame to SRAM 1 and second half to SRAM 2, at word address
// (i mod N/2) / P. Also checks the hand-off: after a full frame in_ready falls
// and frame_avail rises; take moves the buffer to busy (still not ready);
// release makes it ready again for the second frame.
module tb_channel_buffer;
  localparam int N = 64, P = 4, QC = 5, CAW = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic [QC-1:0] in_llr = '0;
  logic in_ready, frame_avail, we1, we2;
  logic take = 1'b0, release_ch = 1'b0;
  logic [CAW-1:0] waddr;
  logic [P-1:0][QC-1:0] wdata;
  int checks = 0, failures = 0, words = 0;
  logic [QC-1:0] sent [N];

  always #5 clk = ~clk;

  channel_buffer #(.N(N), .P(P), .QC(QC), .CAW(CAW)) dut (
    .clk, .rst_n, .in_valid, .in_llr, .in_ready, .frame_avail, .take, .release_ch,
    .we1, .we2, .waddr, .wdata
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // word checker
  always @(posedge clk) if (rst_n && (we1 || we2)) begin
    int w;
    w = (we2 ? N / (2 * P) : 0) + int'(waddr);
    check(!(we1 && we2), "both SRAMs written at once");
    check(we1 == (w < N / (2 * P)), $sformatf("word %0d written to the wrong SRAM", w));
    for (int j = 0; j < P; j++)
      check(wdata[j] == sent[w * P + j], $sformatf("word %0d lane %0d = %0d expected %0d", w, j, wdata[j], sent[w * P + j]));
    words++;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < 2; f++) begin
      automatic int i = 0;
      check(in_ready && !frame_avail, "buffer not ready at frame start");
      while (i < N) begin
        @(negedge clk);
        in_valid = 1'($urandom_range(3) != 0);
        in_llr = QC'($urandom);
        if (in_valid) sent[i] = in_llr;
        @(posedge clk);
        if (in_valid && in_ready) i++;
      end
      @(negedge clk);
      in_valid = 1'b1;        // keep offering data: must be refused
      in_llr = '1;
      check(!in_ready && frame_avail, "full frame not reported");
      repeat (3) @(negedge clk);
      check(!in_ready && frame_avail, "frame_avail not held");
      take = 1'b1;
      @(negedge clk);
      take = 1'b0;
      check(!in_ready && !frame_avail, "buffer not busy after take");
      repeat (4) @(negedge clk);
      check(!in_ready, "buffer accepted data while busy");
      release_ch = 1'b1;
      @(negedge clk);
      release_ch = 1'b0;
      in_valid = 1'b0;
    end
    check(words == 2 * N / P, $sformatf("%0d words written, expected %0d", words, 2 * N / P));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
