// gfb - IEC 61131-3 generic functional block (FAGFB) of a functional cell.
//
// Purely combinational. The active gene selects the operation (opcode_t in
// shc_pkg) and may replace inputs by the constants k0/k1 it carries. The
// operations cover what the paper's two applications need: AND, OR and NOT
// for the emergency diesel generator start logic, and the addition,
// subtraction, multiplication, multiplexing, delay, OR, NOT and comparison
// listed for the cruise control mapping. NAND/NOR/XOR/XNOR/BUF round out the
// logic set. The opcode numbers and the Q16.16 format are this design's
// own; the paper does not give an encoding.
//
// The complement in NOT, NAND, NOR and XNOR is taken over the low 31 bits
// and clears bit 31 (result = 7FFFFFFF - x for a non-negative x). All data
// values in the paper's waveforms are below 80000000, like non-negative
// 31-bit integers, and its NAND/NOR/XNOR results (7FFFFFFF, 2E044444,
// 2E544444 for the printed inputs) are exactly this complement.
//
// A unit delay needs memory: the cell keeps one state word per gene and
// passes it in as st; st_nxt is the value to store after this execution
// (unchanged for every operation except OP_DELAY).
module gfb
  import shc_pkg::*;
(
  input  gene_t gene,
  input  word_t in [N_IN],
  input  word_t st,
  output word_t y,
  output word_t st_nxt
);

  localparam word_t CMASK = {1'b0, {(DATA_W-1){1'b1}}};

  word_t a [N_IN];
  logic signed [DATA_W-1:0]   s0, s1, s2, lo, hi;
  logic signed [2*DATA_W-1:0] prod;

  always_comb begin
    for (int i = 0; i < N_IN; i++) begin
      if (gene.cmask[i]) a[i] = (i < 2) ? word_t'(DATA_W'(gene.k0)) : word_t'(DATA_W'(gene.k1));
      else               a[i] = in[i];
    end
    s0   = a[0];
    s1   = a[1];
    s2   = a[2];
    prod = s0 * s1;
    lo   = (s1 < s2) ? s1 : s2;
    hi   = (s1 < s2) ? s2 : s1;
    st_nxt = st;
    unique case (gene.opcode)
      OP_AND:   y = a[0] & a[1] & a[2] & a[3];
      OP_OR:    y = a[0] | a[1] | a[2] | a[3];
      OP_NAND:  y = ~(a[0] & a[1] & a[2] & a[3]) & CMASK;
      OP_NOR:   y = ~(a[0] | a[1] | a[2] | a[3]) & CMASK;
      OP_XOR:   y = a[0] ^ a[1] ^ a[2] ^ a[3];
      OP_XNOR:  y = ~(a[0] ^ a[1] ^ a[2] ^ a[3]) & CMASK;
      OP_NOT:   y = ~a[0] & CMASK;
      OP_BUF:   y = a[0];
      OP_ADD:   y = a[0] + a[1] + a[2] + a[3];
      OP_SUB:   y = a[0] - a[1];
      OP_MUL:   y = word_t'(prod >>> FRAC);
      OP_MUX:   y = (a[1] != '0) ? a[0] : a[2];
      OP_DELAY: begin
        y      = st;
        st_nxt = a[0];
      end
      OP_CMP:   y = (s0 < lo) ? lo : (s0 > hi) ? hi : s0;
      default:  y = '0;
    endcase
  end

endmodule
