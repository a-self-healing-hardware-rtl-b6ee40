// tb_syndrome_switch - self-checking testbench of the syndrome switching circuit.
// The stem cell is selected for the syndrome column only once that column
// is closed, and stem_retry pulses exactly once when that happens.
module tb_syndrome_switch;
  import shc_pkg::*;
  logic clk = 0, rst_n = 0, syn_valid = 0, stem_retry;
  logic [1:0] syn_col = 0;
  logic [3:0] closed = 0, stem_sel;
  int checks = 0, failures = 0;
  task automatic check(input string what, input logic [31:0] got, input logic [31:0] want);
    checks++;
    if (got !== want) begin
      failures++;
      $display("FAIL %s: got %h want %h at %0t", what, got, want, $time);
    end
  endtask

  syndrome_switch #(.N(4)) dut (.clk, .rst_n, .syn_valid, .syn_col, .closed, .stem_sel, .stem_retry);
  always #5 clk = ~clk;

  initial begin
    int n;
    for (int trial = 0; trial < 200; trial++) begin
      rst_n = 0; syn_valid = 0; closed = 0;
      repeat (2) @(negedge clk);
      rst_n = 1;
      syn_col = 2'($urandom);
      closed = 4'($urandom) & ~(4'(1) << syn_col);
      #1 check("no syndrome", 32'(stem_sel), 0);
      check("no retry", 32'(stem_retry), 0);
      @(negedge clk);
      syn_valid = 1;
      #1 check("standby", 32'(stem_sel), 0);
      @(negedge clk);
      closed[syn_col] = 1;
      #1 check("active", 32'(stem_sel), 32'(4'(1) << syn_col));
      check("retry", 32'(stem_retry), 1);
      n = 0;
      repeat (5) begin
        @(negedge clk);
        n += int'(stem_retry);
        check("held", 32'(stem_sel), 32'(4'(1) << syn_col));
      end
      check("one retry", n, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
