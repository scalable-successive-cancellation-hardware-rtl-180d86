// dp_sram -- simple dual-port memory (one write port, one read port) with a
// registered read, modelling an on-chip SRAM block.
//
// Used for the two channel SRAMs, which hold one half of the received frame
// each as words of P channel LLRs. The read address is sampled on the rising
// clock edge and the word appears on rdata in the following cycle. A read of
// the address being written in the same edge returns the old contents (no
// forwarding; that is added by sram_bypass where the schedule needs it).
// The memory is not reset: every word is written before it is read.
module dp_sram #(
  parameter int unsigned WIDTH = 320,
  parameter int unsigned DEPTH = 256,
  parameter int unsigned AW    = (DEPTH <= 2) ? 1 : $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
