// tb_self_check - self-checking testbench of the self-checking unit.
// Equal operands never set pf; a difference with chk low is ignored; a
// difference with chk high sets pf one clock later and pf stays set.
module tb_self_check;
  logic clk = 0, rst_n = 0, chk = 0, mismatch, pf;
  logic [63:0] a = 0, b = 0;
  int checks = 0, failures = 0;

  self_check #(.W(64)) dut (.clk, .rst_n, .chk, .a, .b, .mismatch, .pf);

  always #5 clk = ~clk;

  task automatic check(input string what, input logic got, input logic want);
    checks++;
    if (got !== want) begin
      failures++;
      $display("FAIL %s: got %b want %b at %0t", what, got, want, $time);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (200) begin
      @(negedge clk);
      a = {$urandom, $urandom}; b = a; chk = 1;
      #1 check("equal mismatch", mismatch, 0);
      @(negedge clk);
      check("equal pf", pf, 0);
      b = a ^ (64'd1 << $urandom_range(0, 63)); chk = 0;
      #1 check("masked mismatch", mismatch, 0);
      @(negedge clk);
      check("masked pf", pf, 0);
    end
    a = 64'h1; b = 64'h3; chk = 1;
    #1 check("mismatch", mismatch, 1);
    @(negedge clk);
    check("pf set", pf, 1);
    a = 0; b = 0;
    repeat (5) @(negedge clk);
    check("pf sticky", pf, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
