// tb_reroute_unit - self-checking testbench of the re-routing unit.
module tb_reroute_unit;
  import shc_pkg::*;
  logic active, stem_retry, s_trigger;
  logic [1:0] sel_col;
  logic [3:0] col_trigger;
  addr_t col_addr [4], s_addr;
  word_t col_din [4][N_IN], s_din [N_IN];
  int checks = 0, failures = 0;
  task automatic check(input string what, input logic [31:0] got, input logic [31:0] want);
    checks++;
    if (got !== want) begin
      failures++;
      $display("FAIL %s: got %h want %h at %0t", what, got, want, $time);
    end
  endtask

  reroute_unit #(.N(4)) dut (.active, .sel_col, .stem_retry, .col_trigger, .col_addr,
                             .col_din, .s_trigger, .s_addr, .s_din);

  initial begin
    repeat (2000) begin
      active = 1'($urandom); stem_retry = 1'($urandom); sel_col = 2'($urandom);
      col_trigger = 4'($urandom);
      foreach (col_addr[k]) begin
        col_addr[k] = addr_t'($urandom);
        foreach (col_din[k][i]) col_din[k][i] = $urandom;
      end
      #1;
      check("trigger", 32'(s_trigger), 32'(active & (col_trigger[sel_col] | stem_retry)));
      if (active) check("addr", 32'(s_addr), 32'(col_addr[sel_col]));
      foreach (s_din[i]) check("din", s_din[i], active ? col_din[sel_col][i] : 0);
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
