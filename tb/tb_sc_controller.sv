// tb_sc_controller -- self-checking testbench of sc_controller.
//
// Part 1 (N = 8, P = 2) compares the operation of every clock cycle of a frame
// with the schedule table of the architecture for that size: cycles 0-1 f on
// stage 2, 2 f on stage 1, 3 chained f/g (u0 u1), 4 encoder stage 0, 5 g on
// stage 1, 6 chained (u2 u3), 7 encoder stage 0, 8-9 encoder stage 1 in two
// cycles, 10-11 g on stage 2, 12 f on stage 1, 13 chained (u4 u5), 14 encoder
// stage 0, 15 g on stage 1, 16 chained (u6 u7); it also checks the take
// and release hand-off and that the controller returns to idle.
// Part 2 (a second instance, N = 1024, P = 16) counts the cycles of a frame
// and compares them with N/P (5P/2 - 1) + 2N/P log2(N/4P) - log2 P + 2, and
// checks that a stored frame is started immediately after the last pair.
module tb_sc_controller;
  import polar_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- part 1: N = 8, P = 2 ----------------
  logic avail1 = 1'b0;
  logic take1, rel1, fgv1, last1, busy1;
  logic pe_ch1, pe_g1;
  logic [4:0] enc_st1;
  logic [2:0] pair1;

  sc_controller #(.N(8), .P(2)) dut1 (
    .clk, .rst_n, .frame_avail(avail1), .take(take1), .release_ch(rel1),
    .ch_raddr(), .llr_raddr(), .llr_we1(), .llr_we2(), .llr_waddr(), .llr_shift(),
    .pe_sel_ch(pe_ch1), .pe_sel_g(pe_g1), .psa_raddr(), .psb_raddr(), .psa_we(), .psb_we(),
    .ps_waddr(), .enc_stage(enc_st1), .enc_half(), .rom_raddr(), .fg_valid(fgv1),
    .pair(pair1), .frame_last(last1), .busy(busy1)
  );

  // expected operation per cycle: "f2", "g1", "fg", "e0", ...
  string sched[17] = '{"f2", "f2", "f1", "fg", "e0", "g1", "fg", "e0", "e1", "e1",
                       "g2", "g2", "f1", "fg", "e0", "g1", "fg"};

  function automatic string op1();
    case (dut1.cur.ph)
      PH_DEC: return $sformatf("%s%0d", dut1.cur.g ? "g" : "f", dut1.cur.stg);
      PH_FG:  return "fg";
      PH_ENC: return $sformatf("e%0d", dut1.cur.stg);
      default: return "idle";
    endcase
  endfunction

  // ---------------- part 2: N = 1024, P = 16 ----------------
  localparam int N2 = 1024, P2 = 16;
  localparam int LAT2 = (N2 / P2) * (5 * P2 / 2 - 1) + (2 * N2 / P2) * 4 - 4 + 2;
  logic avail2 = 1'b0;
  logic take2, rel2, fgv2, last2, busy2;

  sc_controller #(.N(N2), .P(P2)) dut2 (
    .clk, .rst_n, .frame_avail(avail2), .take(take2), .release_ch(rel2),
    .ch_raddr(), .llr_raddr(), .llr_we1(), .llr_we2(), .llr_waddr(), .llr_shift(),
    .pe_sel_ch(), .pe_sel_g(), .psa_raddr(), .psb_raddr(), .psa_we(), .psb_we(),
    .ps_waddr(), .enc_stage(), .enc_half(), .rom_raddr(), .fg_valid(fgv2),
    .pair(), .frame_last(last2), .busy(busy2)
  );

  initial begin
    int released_at;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // part 1
    @(negedge clk);
    avail1 = 1'b1;
    #1;
    check(take1 == 1'b1, "take not raised for a stored frame");
    @(negedge clk);
    avail1 = 1'b0;
    released_at = -1;
    for (int c = 0; c < 17; c++) begin
      check(op1() == sched[c], $sformatf("cycle %0d: operation %s, expected %s", c, op1(), sched[c]));
      if (rel1) released_at = c;
      if (sched[c] == "fg")
        check(fgv1 && int'(pair1) == (c < 5 ? (c == 3 ? 0 : 1) : (c == 6 ? 1 : (c == 13 ? 2 : 3))),
              $sformatf("cycle %0d: pair output", c));
      if (c == 16) check(last1 == 1'b1, "last pair not flagged");
      if (c == 3) check(pe_ch1 == 1'b0, "stage 0 must not read channel");
      if (c == 0) check(pe_ch1 && !pe_g1, "stage 2 f must read channel");
      if (c == 10) check(pe_ch1 && pe_g1, "stage 2 g must read channel");
      @(negedge clk);
    end
    check(released_at == 11, $sformatf("channel released at cycle %0d, expected 11", released_at));
    check(!busy1, "controller not idle after the frame");

    // part 2: two frames, the second stored before the first ends
    @(negedge clk);
    avail2 = 1'b1;
    begin
      int c2, first_lat;
      c2 = 0;
      @(negedge clk);   // take happened on this edge
      avail2 = 1'b1;    // second frame is already stored
      while (!(fgv2 && last2)) begin
        @(negedge clk);
        c2++;
      end
      first_lat = c2 + 1;
      check(first_lat == LAT2, $sformatf("frame latency %0d, expected %0d", first_lat, LAT2));
      #1;
      check(take2 == 1'b1, "second frame not started right after the last pair");
      @(negedge clk);
      avail2 = 1'b0;
      check(busy2, "controller idle instead of decoding the second frame");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
