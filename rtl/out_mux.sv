// out_mux - output multiplexer of one column (DO0..DO3).
//
// Selects which cell's result drives the column's digital output: the B
// cell while it is healthy, the T cell once the local healing layer has
// closed the B output, the stem cell once the global healing layer has given
// it the column. The B cell's word is also masked by close_output, so a dead
// B cell can never reach the output. Combinational. The paper draws the MUX
// blocks; the priority order is this design's reading of the three lines of
// defence.
module out_mux
  import shc_pkg::*;
(
  input  word_t close_output,
  input  logic  sel_t,
  input  logic  sel_s,
  input  word_t b_dout,
  input  logic  b_done,
  input  word_t t_dout,
  input  logic  t_done,
  input  word_t s_dout,
  input  logic  s_done,
  output word_t dout,
  output logic  done
);

  always_comb begin
    if (sel_s) begin
      dout = s_dout;
      done = s_done;
    end else if (sel_t) begin
      dout = t_dout;
      done = t_done;
    end else begin
      dout = b_dout & ~close_output;
      done = b_done && (close_output == '0);
    end
  end

endmodule
