// tb_ps_encoder -- self-checking testbench of ps_encoder (P = 8).
//
// For every encoder stage e of a code long enough to need multi-word stages,
// random decided bits are split into an earlier block L and a later block R of
// 2^e bits each. L and R are encoded separately with the software polar
// transform, fed to the encoder word by word the way the controller does
// (single word for 2^(e+1) <= P, otherwise XOR words then copy words), and the
// collected output must equal the software encoding of the 2^(e+1)-bit
// concatenation. Stage 0 takes its two bits on the u input.
module tb_ps_encoder;
  import polar_ref_pkg::*;

  localparam int P = 8;
  localparam int LOGP = 3;
  localparam int SW = 4;
  localparam int MAXE = 6;   // up to blocks of 128 bits

  logic [SW-1:0] stage;
  logic half;
  logic [1:0] u;
  logic [P-1:0] l_word, r_word, out;
  int checks = 0, failures = 0;

  ps_encoder #(.P(P), .LOGP(LOGP), .SW(SW)) dut (.stage, .half, .u, .l_word, .r_word, .out);

  initial begin
    for (int rep = 0; rep < 20; rep++)
      for (int e = 0; e <= MAXE; e++) begin
        automatic int h = 1 << e;
        bit bl[], br[], ball[], got[];
        bl = new[h];
        br = new[h];
        ball = new[2 * h];
        got = new[2 * h];
        for (int j = 0; j < h; j++) begin
          bl[j] = 1'($urandom);
          br[j] = 1'($urandom);
          ball[j] = bl[j];
          ball[h + j] = br[j];
        end
        polar_encode(bl, h);
        polar_encode(br, h);
        polar_encode(ball, 2 * h);
        stage = SW'(e);
        u = {br[0], bl[0]};
        if (2 * h <= P) begin
          half = 1'b0;
          l_word = '0;
          r_word = '0;
          for (int j = 0; j < h; j++) begin
            l_word[j] = bl[j];
            r_word[j] = br[j];
          end
          #1;
          for (int j = 0; j < 2 * h; j++) got[j] = out[j];
        end else begin
          automatic int k2 = 2 * h / P;
          for (int k = 0; k < k2; k++) begin
            automatic int wk = (k < k2 / 2) ? k : k - k2 / 2;
            half = (k >= k2 / 2);
            for (int j = 0; j < P; j++) begin
              l_word[j] = (k < k2 / 2) ? bl[wk * P + j] : 1'b0;
              r_word[j] = br[wk * P + j];
            end
            #1;
            for (int j = 0; j < P; j++) got[k * P + j] = out[j];
          end
        end
        for (int j = 0; j < 2 * h; j++) begin
          checks++;
          if (got[j] != ball[j]) begin
            failures++;
            if (failures < 10) $display("FAIL: stage %0d bit %0d got %0b expected %0b", e, j, got[j], ball[j]);
          end
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
