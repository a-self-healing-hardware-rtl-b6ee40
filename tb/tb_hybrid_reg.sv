// tb_hybrid_reg - self-checking testbench of the TMR input register.
// Loads random words, flips random bits of one random copy, and checks that
// the voted output never changes, that err flags the upset for exactly one
// cycle and that scrubbing clears it.
module tb_hybrid_reg;
  logic clk = 0, rst_n = 0, load = 0, inj_en = 0, err;
  logic [1:0] inj_copy = 0;
  logic [31:0] d = 0, inj_flip = 0, q, model;
  int checks = 0, failures = 0;

  hybrid_reg #(.W(32)) dut (.clk, .rst_n, .load, .d, .inj_en, .inj_copy, .inj_flip, .q, .err);

  always #5 clk = ~clk;

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] want);
    checks++;
    if (got !== want) begin
      failures++;
      $display("FAIL %s: got %h want %h at %0t", what, got, want, $time);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check("reset q", q, 0);
    check("reset err", 32'(err), 0);
    repeat (300) begin
      d = $urandom; load = 1; model = d;
      @(negedge clk);
      load = 0;
      check("load q", q, model);
      check("load err", 32'(err), 0);
      inj_en = 1; inj_copy = 2'($urandom_range(0, 2)); inj_flip = $urandom | 1;
      @(negedge clk);
      inj_en = 0;
      check("upset masked", q, model);
      check("upset seen", 32'(err), 1);
      @(negedge clk);
      check("scrubbed q", q, model);
      check("scrubbed err", 32'(err), 0);
    end
    // upset in the same cycle as a load: the load wins for the other copies
    d = 32'hA5A5_5A5A; load = 1; inj_en = 1; inj_copy = 2'd1; inj_flip = 32'hFFFF_FFFF;
    @(negedge clk);
    load = 0; inj_en = 0;
    check("load+upset q", q, 32'hA5A5_5A5A);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
