// polar_bench -- reusable end-to-end bench for one configuration of
// polar_decoder_top, used by the workload testbenches.
//
// Builds NF frames of random information bits on the ROM's code, encodes
// them, passes them through a BPSK channel (frame 0 noiseless, later frames
// with noise of spread amp/2, amp = 2^(QF+1) LSBs), streams them back to back
// into its own decoder instance and compares every decided bit with the
// software SC decoder of polar_ref_pkg, the noiseless frame with the
// transmitted bits, and each frame's latency with
// N/P (5P/2 - 1) + 2N/P log2(N/4P) - log2 P + 2 (+1 output register).
// It does not end the simulation: it raises `done` and reports its counts.
module polar_bench #(
  parameter int N   = 1024,
  parameter int P   = 16,
  parameter int QI  = 6,
  parameter int QIC = 3,
  parameter int QF  = 2,
  parameter int FW  = 50420,
  parameter int NF  = 2
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures
);
  import polar_ref_pkg::*;

  localparam int Q    = QI + QF;
  localparam int QC   = QIC + QF;
  localparam int LOGN = $clog2(N);
  localparam int LOGP = $clog2(P);
  localparam int LAT  = (N / P) * (5 * P / 2 - 1) + (2 * N / P) * (LOGN - 2 - LOGP) - LOGP + 2;
  localparam int AMP  = 2 << QF;

  logic rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic [QC-1:0] in_llr = '0;
  logic in_ready, u_valid, u_last, busy;
  logic [1:0] u_out;
  logic [LOGN-2:0] u_pair;
  logic [1:0][Q-1:0] llr_out;

  polar_decoder_top #(.N(N), .P(P), .QI(QI), .QIC(QIC), .QF(QF), .PW_THRESHOLD(FW)) dut (
    .clk, .rst_n, .in_valid, .in_llr, .in_ready, .u_valid, .u_out, .u_pair,
    .u_last, .llr_out, .busy
  );

  int ch [NF][];
  bit u_tx [NF][];
  bit u_ref [NF][];
  bit u_hw [NF][];
  int frames_out = 0, info_bits = 0;
  longint cyc = 0, take_cyc[$];

  initial begin
    done = 1'b0;
    checks = 0;
    failures = 0;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL [N=%0d (%0d,%0d,%0d)]: %s", N, QI, QIC, QF, what);
    end
  endtask

  initial begin
    for (int i = 0; i < N; i++) info_bits += is_frozen(i, FW) ? 0 : 1;
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
      for (int i = 0; i < N; i++) ch[f][i] = channel_llr(x[i], AMP, (f == 0) ? 0 : AMP / 2, QC);
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
        while (!in_ready) @(posedge clk);
      end
      @(negedge clk);
      in_valid = 1'b0;
    end
  end

  always @(posedge clk) if (rst_n && !done) begin
    cyc++;
    if (dut.u_ctrl.take) take_cyc.push_back(cyc);
    if (u_valid && frames_out < NF) begin
      int i0;
      i0 = 2 * int'(u_pair);
      u_hw[frames_out][i0] = u_out[0];
      u_hw[frames_out][i0 + 1] = u_out[1];
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
        lat = cyc - take_cyc.pop_front();
        check(lat == LAT + 1, $sformatf("frame %0d: latency %0d, expected %0d", frames_out, lat, LAT + 1));
        $display("N=%0d P=%0d (%0d,%0d,%0d) K=%0d frame %0d: %0d bit errors vs transmitted, %0d vs reference, latency %0d cycles",
                 N, P, QI, QIC, QF, info_bits, frames_out, tx_errs, errs, lat);
        frames_out++;
        if (frames_out == NF) done <= 1'b1;
      end
    end
  end

endmodule
