// tb_sram: TB-SRAM, the per-PE traceback buffer (1.5 KB by default).
//
// Each GenASM-DC processing element owns one of these and writes one
// 192-bit word {match, insertion, deletion} per processed text base; after the
// window is done GenASM-TB reads them back. As in the paper it has a single
// read/write port, so the DC write and the TB read are multiplexed outside.
// Synchronous: with en=1 and we=1 the word is written at the clock edge; with
// en=1 and we=0 rdata shows mem[addr] after the edge and holds it until the
// next read. Depth 64 words (one per base of a 64-base window) and width 192
// follow the paper; the timing is this design's choice.
module tb_sram #(
  parameter int unsigned DEPTH = 64,
  parameter int unsigned WIDTH = 192,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
