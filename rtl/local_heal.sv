// local_heal - local healing layer of one B cell.
//
// Watches the permanent-fault flag of its B cell. When it rises, the layer
// forms the self-healing health syndrome of the paper in one step:
//   close_output   all ones: the B cell's output is cut off (cell death);
//   select_inputs  the column's inputs are routed to the T cell
//                  (reorganisation);
//   activate_gene  the gene address the B cell was executing, which the T
//                  cell runs from its own copy of the genome (restoration).
// One cycle later retry pulses, so that the T cell re-executes the
// operation that failed. The three outputs then stay set until reset.
// The paper gives the three tasks and the signal names (Close_Output,
// Select_Inputs, Activate_Gene with 32 and 8 bits in the waveform); the
// two-cycle sequence and the retry pulse are this design's choices.
module local_heal
  import shc_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  pf_b,
  input  addr_t b_addr,
  output word_t close_output,
  output logic  select_inputs,
  output addr_t activate_gene,
  output logic  retry
);

  typedef enum logic [1:0] {LH_WATCH, LH_RETRY, LH_HEALED} lh_state_t;
  lh_state_t state;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= LH_WATCH;
      close_output  <= '0;
      select_inputs <= 1'b0;
      activate_gene <= '0;
    end else begin
      unique case (state)
        LH_WATCH: if (pf_b) begin
          state         <= LH_RETRY;
          close_output  <= '1;
          select_inputs <= 1'b1;
          activate_gene <= b_addr;
        end
        LH_RETRY:  state <= LH_HEALED;
        LH_HEALED: state <= LH_HEALED;
        default:   state <= LH_WATCH;
      endcase
    end
  end

  assign retry = (state == LH_RETRY);

endmodule
