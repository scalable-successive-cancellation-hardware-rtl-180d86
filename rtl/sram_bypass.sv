// sram_bypass -- dual-port SRAM with a write-to-read bypass register, the
// "MEM + Bypass + mux" structure drawn for each LLR SRAM and each partial-sum
// SRAM of the decoder.
//
// The memory has a registered read (dp_sram): the address given in cycle t
// returns data in cycle t+1. The decoder schedule often reads, in cycle t+1,
// the word it writes at the end of cycle t (for example the chained stage-0 PE
// reads the two LLRs stage 1 has just produced). When the read and the write
// address match on the same edge, the write data are captured in the bypass
// register and selected by the output multiplexer instead of the stale array
// word. The bypass itself follows the paper's block diagram; the exact
// forwarding rule is this design's choice.
module sram_bypass #(
  parameter int unsigned WIDTH = 512,
  parameter int unsigned DEPTH = 261,
  parameter int unsigned AW    = (DEPTH <= 2) ? 1 : $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata,
  output logic             bypass_hit   // rdata comes from the bypass register
);

  logic [WIDTH-1:0] mem_rdata;
  logic [WIDTH-1:0] byp_data;
  logic             byp_sel;

  dp_sram #(.WIDTH(WIDTH), .DEPTH(DEPTH), .AW(AW)) u_mem (
    .clk, .we, .waddr, .wdata, .raddr, .rdata(mem_rdata)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      byp_sel  <= 1'b0;
      byp_data <= '0;
    end else begin
      byp_sel  <= we && (waddr == raddr);
      if (we) byp_data <= wdata;
    end
  end

  assign rdata      = byp_sel ? byp_data : mem_rdata;
  assign bypass_hit = byp_sel;

endmodule
