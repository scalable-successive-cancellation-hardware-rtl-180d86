// frozen_rom -- N-bit read-only memory that tells, for each bit index i,
// whether u_i is frozen (fixed to 0) or carries information.
//
// The ROM is read two bits at a time (u_i and u_(i+1) for even i), with a
// registered read: the pair address given in cycle t selects the flags seen in
// cycle t+1. Its size, N bits, and its role follow the paper: the code, and
// so the code rate, is chosen only by the ROM contents. The paper does not give
// its frozen sets; this design fills the ROM with a polarization-weight
// construction: bit index i gets the weight PW(i) = sum over the set bits j of
// i of round(2^(j/4) * 4096), an estimate of how reliable the synthetic
// channel of u_i is, and u_i is frozen when PW(i) < PW_THRESHOLD. The default
// threshold leaves 16385 of the 32768 bits of N = 2^15 unfrozen (rate 1/2).
// The weight table covers codes up to N = 2^21.
module frozen_rom #(
  parameter int unsigned N             = 32768,
  parameter int unsigned PW_THRESHOLD  = 134807,
  parameter int unsigned AW            = $clog2(N / 2)
) (
  input  logic          clk,
  input  logic [AW-1:0] raddr,   // pair index i/2
  output logic [1:0]    frozen   // [0]: u_i, [1]: u_(i+1)
);

  // round(2^(j/4) * 4096), j = 0..20
  localparam int unsigned BETA [21] = '{
    4096, 4871, 5793, 6889, 8192, 9742, 11585, 13777, 16384, 19484, 23170,
    27554, 32768, 38968, 46341, 55109, 65536, 77936, 92682, 110218, 131072};

  function automatic int unsigned pw(int unsigned i);
    int unsigned acc = 0;
    for (int unsigned j = 0; j < 21; j++) if (i[j]) acc += BETA[j];
    return acc;
  endfunction

  function automatic logic [1:0] pair_flags(int unsigned pair);
    logic [1:0] f;
    for (int unsigned b = 0; b < 2; b++) f[b] = (pw(2 * pair + b) < PW_THRESHOLD);
    return f;
  endfunction

  logic [1:0] rom [N/2];

  initial begin
    for (int unsigned i = 0; i < N / 2; i++) rom[i] = pair_flags(i);
  end

  always_ff @(posedge clk) frozen <= rom[raddr];

endmodule
