// tb_gfb - self-checking testbench of the generic functional block.
// Checks every opcode against the reference model with random operands and
// constants, and the two waveform values that the bitwise AND/OR of the
// printed inputs North=00FAAAAA, West=50500000, East=00001111,
// South=01010000 give (00000000 and 51FBBBBB), and the printed NAND, NOR
// and XNOR results of the same inputs (7FFFFFFF, 2E044444, 2E544444).
module tb_gfb;
  import shc_pkg::*;
  import tb_ref_pkg::*;

  gene_t gene;
  word_t in [N_IN];
  word_t st, y, st_nxt;
  int checks = 0, failures = 0;
  logic [63:0] exp;

  gfb dut (.gene, .in, .st, .y, .st_nxt);

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] want);
    checks++;
    if (got !== want) begin
      failures++;
      $display("FAIL %s: got %h want %h", what, got, want);
    end
  endtask

  initial begin
    // waveform values
    in[0] = 32'h00FAAAAA; in[1] = 32'h50500000; in[2] = 32'h00001111; in[3] = 32'h01010000;
    st = '0;
    gene = mk_gene(OP_AND); #1 check("fig AND", y, 32'h00000000);
    gene = mk_gene(OP_OR);  #1 check("fig OR", y, 32'h51FBBBBB);
    gene = mk_gene(OP_NAND); #1 check("fig NAND", y, 32'h7FFFFFFF);
    gene = mk_gene(OP_NOR);  #1 check("fig NOR", y, 32'h2E044444);
    gene = mk_gene(OP_XNOR); #1 check("fig XNOR", y, 32'h2E544444);
    // fixed-point cases of the cruise-control constants
    in[0] = 32'h0001_0000 * 10;  // 10.0
    gene = mk_gene(OP_MUL, 4'b0010, 0, 1311);  // 0.02 in Q16.16 is 1310.72
    #1 check("mul 10*0.02", y, 32'(((64'sd655360 * 1311) >>> 16)));
    gene = mk_gene(OP_CMP, 4'b0110, 0, 5 * 65536, -5 * 65536);
    in[0] = 32'h7FFF_FFFF; #1 check("limit hi", y, 32'(5 * 65536));
    in[0] = 32'h8000_0000; #1 check("limit lo", y, 32'(-5 * 65536));
    // random
    repeat (3000) begin
      gene = mk_gene($urandom_range(0, 15), 4'($urandom), 8'($urandom), int'($urandom), int'($urandom));
      foreach (in[i]) in[i] = (($urandom & 3) == 0) ? 32'($urandom & 1) : $urandom;
      st = $urandom;
      #1;
      exp = ref_gfb(gene, in[0], in[1], in[2], in[3], st);
      check($sformatf("op %0d y", gene.opcode), y, exp[31:0]);
      check($sformatf("op %0d st", gene.opcode), st_nxt, exp[63:32]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
