// dc_sram: DC-SRAM, the GenASM-DC working buffer (8 KB by default).
//
// Holds the reference text region and the query of the current task, packed
// 32 bases per 64-bit word, plus a small spill area where the processing block
// parks oldR bitvectors between text tiles. One read port and one write port,
// matching the "one read and one write per cycle" traffic of the processing
// block. Reads are synchronous: rdata holds the word addressed in the
// previous cycle when re was high, and keeps its value otherwise. A read and a
// write to the same address in one cycle return the old word. The size
// follows the paper; the port arrangement and timing are this design's.
// Written as a plain array so that synthesis can map it to an SRAM macro.
module dc_sram #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned WIDTH = 64,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
