// tb_bio_cell - self-checking testbench of the functional cell.
// Two cells: a single-genome cell (B/T role) and a four-genome cell (stem
// role). Checks: results of random genes against the reference model, the
// 2-cycle trigger-to-done latency, the per-gene unit-delay state, masking
// of transient faults injected into input registers while an operation is
// in flight, and detection of a stuck-at permanent fault (pf set, no done,
// later triggers ignored).
module tb_bio_cell;
  import shc_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [1:0] cfg_sel = 0, gsel = 0;
  logic [3:0] cfg_addr = 0, addr = 0;
  gene_t cfg_gene;
  logic trigger = 0;
  word_t din [N_IN];
  tf_inj_t tf;
  word_t pf_mask = 0;
  logic done [2], busy [2], pf [2], tf_seen [2];
  word_t dout [2];
  gene_t gene [2];
  logic trig [2];

  gene_t model [2][64];
  word_t st_model [2][64];
  int checks = 0, failures = 0;
  int lat;
  logic [63:0] exp;
  logic [31:0] pm [2];

  assign pm[0] = pf_mask;
  assign pm[1] = '0;

  bio_cell #(.N_GENOMES(1)) u_single (
    .clk, .rst_n, .cfg_we, .cfg_sel, .cfg_addr, .cfg_gene,
    .trigger(trig[0]), .gsel, .addr, .din,
    .done(done[0]), .dout(dout[0]), .busy(busy[0]), .gene(gene[0]),
    .pf(pf[0]), .tf_seen(tf_seen[0]), .tf, .pf_mask(pm[0])
  );
  bio_cell #(.N_GENOMES(4)) u_stem (
    .clk, .rst_n, .cfg_we, .cfg_sel, .cfg_addr, .cfg_gene,
    .trigger(trig[1]), .gsel, .addr, .din,
    .done(done[1]), .dout(dout[1]), .busy(busy[1]), .gene(gene[1]),
    .pf(pf[1]), .tf_seen(tf_seen[1]), .tf, .pf_mask(pm[1])
  );

  int which = 0;
  assign trig[0] = trigger && which == 0;
  assign trig[1] = trigger && which == 1;

  always #5 clk = ~clk;

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] want);
    checks++;
    if (got !== want) begin
      failures++;
      $display("FAIL %s: got %h want %h at %0t", what, got, want, $time);
    end
  endtask

  // one operation on cell c; optional transient fault while it runs
  task automatic run(input int c, input logic [1:0] g, input logic [3:0] a, input bit upset,
                     input bit expect_done);
    int idx;
    idx = (c == 1) ? int'(g) * 16 + int'(a) : int'(a);
    foreach (din[i]) din[i] = (($urandom & 3) == 0) ? 32'($urandom & 1) : $urandom;
    exp = ref_gfb(model[c][idx], din[0], din[1], din[2], din[3], st_model[c][idx]);
    @(negedge clk);
    which = c; gsel = g; addr = a; trigger = 1;
    // an upset in the same edge as the capture leaves one copy wrong while
    // the GFBs evaluate
    if (upset) begin
      tf.en = 1; tf.reg_sel = 2'($urandom); tf.copy = 2'($urandom_range(0, 2)); tf.flip = $urandom | 32'h1;
    end
    @(negedge clk);
    trigger = 0;
    tf.en = 0;
    if (upset) check("upset seen", 32'(tf_seen[c]), 1);
    lat = 1;
    while (!done[c] && lat < 6) begin
      @(negedge clk);
      lat++;
    end
    if (expect_done) begin
      check("latency", lat, 2);
      check($sformatf("result op %0d", model[c][idx].opcode), dout[c], exp[31:0]);
      check("gene xy", 32'(gene[c].xy), 32'(model[c][idx].xy));
      st_model[c][idx] = exp[63:32];
    end else begin
      check("no done", 32'(done[c]), 0);
    end
  endtask

  initial begin
    tf = '0;
    foreach (din[i]) din[i] = '0;
    foreach (st_model[c, i]) st_model[c][i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // configure: genome of the single cell, four genomes of the stem cell
    for (int g = 0; g < 4; g++) begin
      for (int a = 0; a < 16; a++) begin
        @(negedge clk);
        cfg_gene = mk_gene($urandom_range(0, 13), 4'($urandom & $urandom), 8'(g * 16 + a),
                           int'($urandom), int'($urandom));
        if (a == 3) cfg_gene.opcode = OP_DELAY;
        cfg_sel = 2'(g); cfg_addr = 4'(a); cfg_we = 1;
        model[1][g * 16 + a] = cfg_gene;
        model[0][a] = cfg_gene;  // the single-genome cell ignores cfg_sel
      end
    end
    @(negedge clk); cfg_we = 0;
    // single-genome cell, with and without upsets
    repeat (200) run(0, 2'd0, 4'($urandom), $urandom_range(0, 1) == 1, 1);
    repeat (5) run(0, 2'd0, 4'd3, 0, 1);  // unit delay chain
    // stem cell, all genomes
    repeat (300) run(1, 2'($urandom), 4'($urandom), $urandom_range(0, 1) == 1, 1);
    // permanent fault: choose a gene whose result is not all ones
    model[0][5] = mk_gene(OP_AND);
    @(negedge clk); cfg_we = 1; cfg_sel = 0; cfg_addr = 4'd5; cfg_gene = model[0][5];
    @(negedge clk); cfg_we = 0;
    check("pf before", 32'(pf[0]), 0);
    pf_mask = 32'hFFFF_FFFF;
    run(0, 2'd0, 4'd5, 0, 0);
    check("pf after", 32'(pf[0]), 1);
    run(0, 2'd0, 4'd1, 0, 0);   // dead cell ignores triggers
    check("dead busy", 32'(busy[0]), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
