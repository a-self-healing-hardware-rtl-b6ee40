// transfer_inputs - routes a column's inputs to its T cell.
//
// While select_inputs is low the T cell is passive: its trigger is held low
// and its data inputs at zero. Once the local healing layer sets
// select_inputs, the column's four data words, its trigger and its gene
// address reach the T cell. During the retry pulse the T cell is triggered
// with the address held in activate_gene, so that it repeats the operation
// the B cell failed. Combinational. The paper names the block and its task;
// the gating of the passive T cell is this design's choice.
module transfer_inputs
  import shc_pkg::*;
(
  input  logic  select_inputs,
  input  logic  retry,
  input  addr_t activate_gene,
  input  logic  col_trigger,
  input  addr_t col_addr,
  input  word_t col_din [N_IN],
  output logic  t_trigger,
  output addr_t t_addr,
  output word_t t_din [N_IN]
);

  always_comb begin
    t_trigger = select_inputs && (col_trigger || retry);
    t_addr    = retry ? activate_gene : col_addr;
    for (int i = 0; i < N_IN; i++) t_din[i] = select_inputs ? col_din[i] : '0;
  end

endmodule
