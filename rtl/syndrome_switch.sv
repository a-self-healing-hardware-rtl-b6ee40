// syndrome_switch - "Syndrome Switching Circuit" of the global healing layer.
//
// Turns the health syndrome into switch settings. The stem cell runs the
// genome of column syn_col (the top feeds syn_col to its genome select).
// It becomes the column's active cell (stem_sel one-hot, read by that
// column's output MUX) once both the column's T cell has failed (syn_valid) and the column's B cell has been
// closed by its local healing layer; before that it waits as a standby
// spare. On the cycle stem_sel turns on, stem_retry pulses so that the
// stem cell repeats the operation that the failing cell could not finish.
// stem_sel is combinational, stem_retry compares it with its registered
// copy. Block name from the paper; its rules are this design's choice.
module syndrome_switch
  import shc_pkg::*;
#(
  parameter int unsigned N = N_COLS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 syn_valid,
  input  logic [$clog2(N)-1:0] syn_col,
  input  logic [N-1:0]         closed,
  output logic [N-1:0]         stem_sel,
  output logic                 stem_retry
);

  logic active, active_q;

  always_comb begin
    stem_sel = '0;
    active   = syn_valid && closed[syn_col];
    if (active) stem_sel[syn_col] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) active_q <= 1'b0;
    else        active_q <= active;
  end

  assign stem_retry = active && !active_q;

endmodule
