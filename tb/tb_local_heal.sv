// tb_local_heal - self-checking testbench of the local healing layer.
// Before a fault all outputs are idle whatever the address does; the cycle
// after pf_b rises close_output, select_inputs and activate_gene are set,
// retry pulses for exactly one cycle, and everything then holds even when
// the address changes.
module tb_local_heal;
  import shc_pkg::*;
  logic clk = 0, rst_n = 0, pf_b = 0, select_inputs, retry;
  addr_t b_addr = 0, activate_gene;
  word_t close_output;
  int checks = 0, failures = 0;
  task automatic check(input string what, input logic [31:0] got, input logic [31:0] want);
    checks++;
    if (got !== want) begin
      failures++;
      $display("FAIL %s: got %h want %h at %0t", what, got, want, $time);
    end
  endtask

  local_heal dut (.clk, .rst_n, .pf_b, .b_addr, .close_output, .select_inputs, .activate_gene, .retry);
  always #5 clk = ~clk;

  initial begin
    int n_retry;
    for (int trial = 0; trial < 20; trial++) begin
      rst_n = 0; pf_b = 0;
      repeat (2) @(negedge clk);
      rst_n = 1;
      repeat ($urandom_range(1, 10)) begin
        b_addr = addr_t'($urandom);
        @(negedge clk);
        check("idle close", close_output, 0);
        check("idle select", 32'(select_inputs), 0);
        check("idle retry", 32'(retry), 0);
      end
      b_addr = addr_t'(trial);
      pf_b = 1;
      @(negedge clk);
      check("close", close_output, 32'hFFFF_FFFF);
      check("select", 32'(select_inputs), 1);
      check("gene", 32'(activate_gene), 32'(addr_t'(trial)));
      check("retry", 32'(retry), 1);
      n_retry = 0;
      repeat (10) begin
        b_addr = addr_t'($urandom);
        @(negedge clk);
        n_retry += int'(retry);
        check("hold close", close_output, 32'hFFFF_FFFF);
        check("hold gene", 32'(activate_gene), 32'(addr_t'(trial)));
      end
      check("single retry", n_retry, 0);
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
