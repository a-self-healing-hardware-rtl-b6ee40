// hybrid_reg - input register of a functional cell with a hybrid redundancy unit.
//
// The register is held in three copies. The output is their bitwise majority,
// so an upset in one copy never reaches the GFB (static masking). Every cycle
// in which the register is not loaded, all three copies are rewritten with
// the voted value (scrubbing), so an upset is also removed one cycle after it
// happened (dynamic correction). Static masking plus dynamic repair is what
// this design takes "hybrid redundancy" to mean; the paper names the unit and
// its purpose (tolerating transient faults in the input registers) but not
// its insides.
//
// Interface: load writes d into all copies at the clock edge. inj flips the
// selected bits of one copy at the clock edge, modelling a radiation-induced
// upset; it overrides scrubbing of that copy in that cycle. q is the voted
// value; err is high in a cycle in which the copies disagree.
module hybrid_reg #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic [W-1:0] d,
  input  logic         inj_en,
  input  logic [1:0]   inj_copy,
  input  logic [W-1:0] inj_flip,
  output logic [W-1:0] q,
  output logic         err
);

  logic [W-1:0] cp [3];

  always_comb begin
    q   = (cp[0] & cp[1]) | (cp[0] & cp[2]) | (cp[1] & cp[2]);
    err = (cp[0] != cp[1]) || (cp[0] != cp[2]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 3; i++) cp[i] <= '0;
    end else begin
      for (int i = 0; i < 3; i++) begin
        if (inj_en && inj_copy == 2'(i)) cp[i] <= cp[i] ^ inj_flip;
        else if (load)                   cp[i] <= d;
        else                             cp[i] <= q;
      end
    end
  end

endmodule
