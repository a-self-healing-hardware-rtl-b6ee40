// tb_transfer_inputs - self-checking testbench of the transfer inputs unit.
// Random stimulus; the expected T-cell inputs are worked out in the test.
module tb_transfer_inputs;
  import shc_pkg::*;
  logic select_inputs, retry, col_trigger, t_trigger;
  addr_t activate_gene, col_addr, t_addr;
  word_t col_din [N_IN], t_din [N_IN];
  int checks = 0, failures = 0;
  task automatic check(input string what, input logic [31:0] got, input logic [31:0] want);
    checks++;
    if (got !== want) begin
      failures++;
      $display("FAIL %s: got %h want %h at %0t", what, got, want, $time);
    end
  endtask

  transfer_inputs dut (.select_inputs, .retry, .activate_gene, .col_trigger, .col_addr, .col_din,
                       .t_trigger, .t_addr, .t_din);

  initial begin
    repeat (2000) begin
      select_inputs = 1'($urandom); retry = 1'($urandom); col_trigger = 1'($urandom);
      activate_gene = addr_t'($urandom); col_addr = addr_t'($urandom);
      foreach (col_din[i]) col_din[i] = $urandom;
      #1;
      check("trigger", 32'(t_trigger), 32'(select_inputs & (col_trigger | retry)));
      if (select_inputs) check("addr", 32'(t_addr), 32'(retry ? activate_gene : col_addr));
      foreach (col_din[i]) check("din", t_din[i], select_inputs ? col_din[i] : 0);
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
