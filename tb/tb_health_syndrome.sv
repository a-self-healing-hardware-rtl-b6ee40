// tb_health_syndrome - self-checking testbench of the health syndrome former.
// For random fault orders: the first failing T cell (lowest index on a tie)
// is latched, a second T failure or a stem-cell failure raises alarm.
module tb_health_syndrome;
  import shc_pkg::*;
  logic clk = 0, rst_n = 0, pf_s = 0, syn_valid, alarm;
  logic [3:0] pf_t = 0;
  logic [4:0] syndrome;
  logic [1:0] syn_col;
  int checks = 0, failures = 0;
  task automatic check(input string what, input logic [31:0] got, input logic [31:0] want);
    checks++;
    if (got !== want) begin
      failures++;
      $display("FAIL %s: got %h want %h at %0t", what, got, want, $time);
    end
  endtask

  health_syndrome #(.N(4)) dut (.clk, .rst_n, .pf_t, .pf_s, .syndrome, .syn_valid, .syn_col, .alarm);
  always #5 clk = ~clk;

  initial begin
    logic [3:0] f1, f2;
    int first;
    for (int trial = 0; trial < 200; trial++) begin
      rst_n = 0; pf_t = 0; pf_s = 0;
      repeat (2) @(negedge clk);
      rst_n = 1;
      @(negedge clk);
      check("idle valid", 32'(syn_valid), 0);
      check("idle alarm", 32'(alarm), 0);
      f1 = 4'($urandom) | 4'(1 << $urandom_range(0, 3));
      first = 0;
      while (!f1[first]) first++;
      pf_t = f1;
      @(negedge clk);
      check("valid", 32'(syn_valid), 1);
      check("col", 32'(syn_col), first);
      check("syndrome", 32'(syndrome), 32'(f1));
      check("alarm multi", 32'(alarm), 32'($countones(f1) > 1));
      f2 = f1 | 4'(1 << $urandom_range(0, 3));
      pf_t = f2;
      @(negedge clk);
      check("col held", 32'(syn_col), first);
      check("alarm second", 32'(alarm), 32'($countones(f2) > 1));
      pf_s = 1;
      @(negedge clk);
      check("alarm stem", 32'(alarm), 1);
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
