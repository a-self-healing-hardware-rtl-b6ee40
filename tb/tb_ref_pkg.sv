// tb_ref_pkg - reference model and helpers shared by the testbenches.
//
// ref_gfb computes what a generic functional block must return for a gene,
// written independently of the RTL (explicit per-operation arithmetic on
// 64-bit integers). mk_gene builds a gene from its fields.
package tb_ref_pkg;
  import shc_pkg::*;

  function automatic longint sx32(input logic [31:0] v);
    return longint'(signed'(v));
  endfunction

  function automatic gene_t mk_gene(input int op, input logic [3:0] cmask = 4'b0,
                                    input logic [7:0] xy = 8'h0,
                                    input int k0 = 0, input int k1 = 0);
    gene_t g;
    g.opcode = opcode_t'(op);
    g.cmask  = cmask;
    g.xy     = xy;
    g.k0     = k0[23:0];
    g.k1     = k1[23:0];
    return g;
  endfunction

  // returns {next_state, y}
  function automatic logic [63:0] ref_gfb(input gene_t g, input logic [31:0] i0, i1, i2, i3,
                                         input logic [31:0] st);
    logic [31:0] a [4];
    logic [31:0] y;
    logic [31:0] nst;
    longint p, lo, hi, v;
    a[0] = g.cmask[0] ? 32'(signed'(g.k0)) : i0;
    a[1] = g.cmask[1] ? 32'(signed'(g.k0)) : i1;
    a[2] = g.cmask[2] ? 32'(signed'(g.k1)) : i2;
    a[3] = g.cmask[3] ? 32'(signed'(g.k1)) : i3;
    nst = st;
    case (int'(g.opcode))
      0: y = a[0] & a[1] & a[2] & a[3];
      1: y = a[0] | a[1] | a[2] | a[3];
      2: y = 32'h7FFF_FFFF - ((a[0] & a[1] & a[2] & a[3]) & 32'h7FFF_FFFF);
      3: y = 32'h7FFF_FFFF - ((a[0] | a[1] | a[2] | a[3]) & 32'h7FFF_FFFF);
      4: y = a[0] ^ a[1] ^ a[2] ^ a[3];
      5: y = 32'h7FFF_FFFF - ((a[0] ^ a[1] ^ a[2] ^ a[3]) & 32'h7FFF_FFFF);
      6: y = 32'h7FFF_FFFF - (a[0] & 32'h7FFF_FFFF);
      7: y = a[0];
      8: y = 32'(sx32(a[0]) + sx32(a[1]) + sx32(a[2]) + sx32(a[3]));
      9: y = 32'(sx32(a[0]) - sx32(a[1]));
      10: begin p = sx32(a[0]) * sx32(a[1]); y = 32'(p >>> 16); end
      11: y = (a[1] != 0) ? a[0] : a[2];
      12: begin y = st; nst = a[0]; end
      13: begin
        lo = (sx32(a[1]) < sx32(a[2])) ? sx32(a[1]) : sx32(a[2]);
        hi = (sx32(a[1]) < sx32(a[2])) ? sx32(a[2]) : sx32(a[1]);
        v  = sx32(a[0]);
        if (v < lo) v = lo;
        if (v > hi) v = hi;
        y = 32'(v);
      end
      default: y = 0;
    endcase
    return {nst, y};
  endfunction

endpackage
