// tb_genome_mem - self-checking testbench of the configuration memory.
// Writes a random gene to every address, then reads them all back, then
// overwrites random addresses and checks the rest are untouched.
module tb_genome_mem;
  import shc_pkg::*;
  logic clk = 0, we = 0;
  logic [3:0] waddr = 0, raddr = 0;
  gene_t wdata, rdata;
  gene_t model [16];
  int checks = 0, failures = 0;

  genome_mem #(.DEPTH(16)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  always #5 clk = ~clk;

  task automatic rand_gene(output gene_t g);
    g = gene_t'({$urandom, $urandom, $urandom});
  endtask

  task automatic check_all();
    for (int a = 0; a < 16; a++) begin
      raddr = 4'(a);
      #1;
      checks++;
      if (rdata !== model[a]) begin
        failures++;
        $display("FAIL addr %0d got %h want %h", a, rdata, model[a]);
      end
    end
  endtask

  initial begin
    for (int a = 0; a < 16; a++) begin
      @(negedge clk);
      rand_gene(wdata); waddr = 4'(a); we = 1; model[a] = wdata;
    end
    @(negedge clk); we = 0;
    check_all();
    repeat (50) begin
      @(negedge clk);
      rand_gene(wdata); waddr = 4'($urandom); we = 1; model[waddr] = wdata;
      @(negedge clk); we = 0;
      check_all();
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
