// reroute_unit - "Re-routing Unit" of the global healing layer.
//
// Connects the stem cell to the inputs of the column it serves: the four
// data words, the trigger and the gene address of column sel_col. While
// the stem cell is not the active cell of any column (active low) it gets
// no trigger and zero data. During stem_retry it is triggered with the
// column's current gene address, which the column's driver holds until the
// result arrives, so the stem cell repeats the operation the failing cell
// could not finish. Combinational. Block name from the paper; its
// behaviour is this design's choice, mirroring transfer_inputs.
module reroute_unit
  import shc_pkg::*;
#(
  parameter int unsigned N = N_COLS
) (
  input  logic                 active,
  input  logic [$clog2(N)-1:0] sel_col,
  input  logic                 stem_retry,
  input  logic [N-1:0]         col_trigger,
  input  addr_t                col_addr [N],
  input  word_t                col_din [N][N_IN],
  output logic                 s_trigger,
  output addr_t                s_addr,
  output word_t                s_din [N_IN]
);

  always_comb begin
    s_trigger = active && (col_trigger[sel_col] || stem_retry);
    s_addr    = col_addr[sel_col];
    for (int i = 0; i < N_IN; i++) s_din[i] = active ? col_din[sel_col][i] : '0;
  end

endmodule
