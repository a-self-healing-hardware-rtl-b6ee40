// health_syndrome - "Forming Health Syndrome" block of the global healing layer.
//
// Collects the permanent-fault flags PF0..PF3 of the four T cells and of the
// stem cell into the global health syndrome. The first T cell to fail gets
// the stem cell: its column number is latched in syn_col and syn_valid is
// set (lowest column first if several fail in the same cycle). The stem
// cell is a single spare, so a later T-cell failure in another column, or a
// failure of the stem cell itself, raises alarm: from then on a further
// fault in that column cannot be healed. Registered: the outputs follow a
// fault flag by one clock. The paper names the block and its inputs
// PF0..PF3; the single-spare assignment rule is this design's choice.
module health_syndrome
  import shc_pkg::*;
#(
  parameter int unsigned N = N_COLS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         pf_t,
  input  logic                 pf_s,
  output logic [N:0]           syndrome,   // {pf_s, pf_t} as last sampled
  output logic                 syn_valid,
  output logic [$clog2(N)-1:0] syn_col,
  output logic                 alarm
);

  logic [$clog2(N)-1:0] first;
  logic                 any;
  logic [N-1:0]         others;

  always_comb begin
    any   = 1'b0;
    first = '0;
    for (int i = N - 1; i >= 0; i--) begin
      if (pf_t[i]) begin
        any   = 1'b1;
        first = ($clog2(N))'(i);
      end
    end
    others = pf_t;
    if (syn_valid) others[syn_col] = 1'b0;
    else if (any)  others[first]   = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      syndrome  <= '0;
      syn_valid <= 1'b0;
      syn_col   <= '0;
      alarm     <= 1'b0;
    end else begin
      syndrome <= {pf_s, pf_t};
      if (!syn_valid && any) begin
        syn_valid <= 1'b1;
        syn_col   <= first;
      end
      if (pf_s || (others != '0)) alarm <= 1'b1;
    end
  end

endmodule
