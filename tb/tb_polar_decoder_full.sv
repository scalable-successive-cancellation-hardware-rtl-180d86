// tb_polar_decoder_full -- end-to-end testbench of polar_decoder_top with every parameter at its default (N = 2^15, P = 64, (6,3,2)).
//
// Streams 3 frames of channel LLRs back to back into the decoder (frame 0
// noiseless, the others through a noisy BPSK channel), collects the decided
// bits and compares every frame, bit for bit, with the software SC decoder of
// polar_ref_pkg, which applies the same fixed-point rules but none of the
// hardware's memory map or schedule. It also checks
//   * that the noiseless frame is decoded to the transmitted bits;
//   * the decoding latency of every frame against
//     N/P (5P/2 - 1) + 2N/P log2(N/4P) - log2 P + 2 (+1 for the output register);
//   * that every mechanism of the design occurred at least once: bypass reads
//     of both LLR SRAMs and both partial-sum SRAMs, channel loading overlapped
//     with decoding, input back-pressure, a frame started straight after the
//     previous one, f and g passes on the channel stage, single-word and
//     multi-word encoder stages, frozen and information bits, and a noisy
//     frame decoded to the transmitted bits.
// A watchdog ends the run with a failure if the frames do not complete.
module tb_polar_decoder_full;
  import polar_ref_pkg::*;

  localparam int N   = 32768;
  localparam int P   = 64;
  localparam int QI  = 6;
  localparam int QIC = 3;
  localparam int QF  = 2;
  localparam int FW  = 134807;
  localparam int Q   = QI + QF;
  localparam int QC  = QIC + QF;
  localparam int LOGN = $clog2(N);
  localparam int LOGP = $clog2(P);
  localparam int NF  = 3;
  localparam int LAT = (N / P) * (5 * P / 2 - 1) + (2 * N / P) * (LOGN - 2 - LOGP) - LOGP + 2;
  localparam longint WATCHDOG = longint'(NF + 2) * longint'(LAT + N) + 1000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic [QC-1:0] in_llr = '0;
  logic in_ready, u_valid, u_last, busy;
  logic [1:0] u_out;
  logic [LOGN-2:0] u_pair;
  logic [1:0][Q-1:0] llr_out;

  always #5 clk = ~clk;

  polar_decoder_top  dut (
    .clk, .rst_n, .in_valid, .in_llr, .in_ready, .u_valid, .u_out, .u_pair,
    .u_last, .llr_out, .busy
  );

  int checks = 0, failures = 0;
  int ch [NF][];
  bit u_tx [NF][];
  bit u_ref [NF][];
  bit u_hw [NF][];
  int frames_out = 0;

  // mechanism counters
  int n_byp_l1 = 0, n_byp_l2 = 0, n_byp_a = 0, n_byp_b = 0;
  int n_overlap = 0, n_backpressure = 0, n_back_to_back = 0;
  int n_ch_f = 0, n_ch_g = 0, n_enc_small = 0, n_enc_large = 0;
  int n_frozen = 0, n_info = 0, n_corrected = 0;
  longint cyc = 0, take_cyc[$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- stimulus and reference ----------------
  initial begin
    for (int f = 0; f < NF; f++) begin
      bit x[];
      u_tx[f] = new[N];
      x = new[N];
      ch[f] = new[N];
      u_ref[f] = new[N];
      u_hw[f] = new[N];
      for (int i = 0; i < N; i++) begin
        u_tx[f][i] = is_frozen(i, FW) ? 1'b0 : 1'($urandom);
        x[i] = u_tx[f][i];
      end
      polar_encode(x, N);
      for (int i = 0; i < N; i++)
        ch[f][i] = channel_llr(x[i], 1 << QF, (f == 0) ? 0 : ((f % 2 == 1) ? 1 << (QF - 1) : 3 << (QF - 2)), QC);
      sc_decode(LOGN, Q, FW, ch[f], u_ref[f]);
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < NF; f++) begin
      for (int i = 0; i < N; i++) begin
        @(negedge clk);
        in_valid = 1'b1;
        in_llr = QC'(ch[f][i]);
        @(posedge clk);
        while (!in_ready) begin
          n_backpressure++;
          @(posedge clk);
        end
        if (busy) n_overlap++;
      end
      @(negedge clk);
      in_valid = 1'b0;
      // a short pause between some frames
      if (f % 2 == 1) repeat (5) @(negedge clk);
    end
  end

  // ---------------- monitor ----------------
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (dut.u_ctrl.take) begin
      take_cyc.push_back(cyc);
      if (dut.u_ctrl.cur.ph == polar_pkg::PH_FG) n_back_to_back++;
    end
    if (dut.u_llr_sram1.bypass_hit) n_byp_l1++;
    if (dut.u_llr_sram2.bypass_hit) n_byp_l2++;
    if (dut.u_ps_sram_a.bypass_hit) n_byp_a++;
    if (dut.u_ps_sram_b.bypass_hit) n_byp_b++;
    if (dut.pe_sel_ch && !dut.pe_sel_g) n_ch_f++;
    if (dut.pe_sel_ch && dut.pe_sel_g) n_ch_g++;
    if (dut.u_ctrl.cur.ph == polar_pkg::PH_ENC) begin
      if (int'(dut.enc_stage) + 1 <= LOGP) n_enc_small++;
      else n_enc_large++;
    end
    if (u_valid && frames_out < NF) begin
      for (int b = 0; b < 2; b++) begin
        int i;
        i = 2 * int'(u_pair) + b;
        u_hw[frames_out][i] = u_out[b];
        if (is_frozen(i, FW)) n_frozen++; else n_info++;
      end
      if (u_last) begin
        int errs, tx_errs;
        longint lat;
        errs = 0;
        tx_errs = 0;
        for (int i = 0; i < N; i++) begin
          if (u_hw[frames_out][i] != u_ref[frames_out][i]) errs++;
          if (u_ref[frames_out][i] != u_tx[frames_out][i]) tx_errs++;
        end
        check(errs == 0, $sformatf("frame %0d: %0d bits differ from the reference", frames_out, errs));
        if (frames_out == 0) check(tx_errs == 0, "noiseless frame not decoded to the transmitted bits");
        else if (tx_errs == 0) n_corrected++;
        lat = cyc - take_cyc.pop_front();
        check(lat == LAT + 1, $sformatf("frame %0d: latency %0d, expected %0d", frames_out, lat, LAT + 1));
        $display("frame %0d: %0d bit errors vs transmitted, %0d vs reference, latency %0d cycles",
                 frames_out, tx_errs, errs, lat);
        frames_out++;
        if (frames_out == NF) finish_run();
      end
    end
  end

  function automatic void mech(int n, string what);
    $display("  %-36s %0d", what, n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL: mechanism never exercised: %s", what);
    end
  endfunction

  task automatic finish_run();
    $display("mechanisms:");
    mech(n_byp_l1, "LLR SRAM 1 bypass reads");
    mech(n_byp_l2, "LLR SRAM 2 bypass reads");
    mech(n_byp_a, "partial-sum SRAM A bypass reads");
    mech(n_byp_b, "partial-sum SRAM B bypass reads");
    mech(n_overlap, "LLRs loaded while decoding");
    mech(n_backpressure, "input back-pressure cycles");
    mech(n_back_to_back, "frames started back to back");
    mech(n_ch_f, "f cycles on channel LLRs");
    mech(n_ch_g, "g cycles on channel LLRs");
    mech(n_enc_small, "single-word encoder cycles");
    mech(n_enc_large, "multi-word encoder cycles");
    mech(n_frozen, "frozen bits output");
    mech(n_info, "information bits output");
    mech(n_corrected, "noisy frames decoded without error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    for (longint c = 0; c < WATCHDOG; c++) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired after %0d cycles, %0d frames out", WATCHDOG, frames_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
