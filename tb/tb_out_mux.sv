// tb_out_mux - self-checking testbench of a column's output MUX.
module tb_out_mux;
  import shc_pkg::*;
  logic sel_t, sel_s, b_done, t_done, s_done, done;
  word_t close_output, b_dout, t_dout, s_dout, dout;
  int checks = 0, failures = 0;
  task automatic check(input string what, input logic [31:0] got, input logic [31:0] want);
    checks++;
    if (got !== want) begin
      failures++;
      $display("FAIL %s: got %h want %h at %0t", what, got, want, $time);
    end
  endtask

  out_mux dut (.close_output, .sel_t, .sel_s, .b_dout, .b_done, .t_dout, .t_done,
               .s_dout, .s_done, .dout, .done);

  initial begin
    repeat (2000) begin
      sel_t = 1'($urandom); sel_s = 1'($urandom);
      close_output = sel_t ? 32'hFFFF_FFFF : (($urandom & 1) ? $urandom : 0);
      {b_done, t_done, s_done} = 3'($urandom);
      b_dout = $urandom; t_dout = $urandom; s_dout = $urandom;
      #1;
      if (sel_s) begin
        check("s dout", dout, s_dout); check("s done", 32'(done), 32'(s_done));
      end else if (sel_t) begin
        check("t dout", dout, t_dout); check("t done", 32'(done), 32'(t_done));
      end else begin
        check("b dout", dout, b_dout & ~close_output);
        check("b done", 32'(done), 32'(b_done && close_output == 0));
      end
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
