// self_check - self-checking unit of a functional cell.
//
// Compares the result of the cell's GFB with that of a second, checker GFB
// fed with the same operands. A difference while chk is high means the GFB is
// broken; the unit latches this as a permanent fault (pf, sticky until
// reset), which is what notifies the local or global healing layer. The
// paper says each cell has an embedded self-checking unit that detects
// permanent faults in the GFB immediately; duplication with comparison is
// this design's choice of how.
//
// Timing: mismatch is combinational; pf rises one clock after a mismatch
// seen with chk high.
module self_check #(
  parameter int unsigned W = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         chk,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic         mismatch,
  output logic         pf
);

  assign mismatch = chk && (a != b);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        pf <= 1'b0;
    else if (mismatch) pf <= 1'b1;
  end

endmodule
