// genome_mem - configuration memory holding a cell's genetic codes.
//
// A plain synchronous-write, asynchronous-read array of DEPTH genes. The
// paper stores the genes in a configuration memory inside each cell and
// selects one to heal or restore a function; how the memory is filled is not
// described, so a simple write port (we/waddr/wdata) is this design's choice.
// The contents are not reset: they are loaded before the cell is used.
module genome_mem
  import shc_pkg::*;
#(
  parameter int unsigned DEPTH = GENOME_DEPTH,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  gene_t         wdata,
  input  logic [AW-1:0] raddr,
  output gene_t         rdata
);

  gene_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];

endmodule
