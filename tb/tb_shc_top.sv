// tb_shc_top - end-to-end testbench of the self-healing tile at its default
// size.
//
// Loads a genome into every column, then walks through the three lines of
// defence and checks every result against the reference model and every
// trigger-to-done latency:
//   W  the paper's transient-fault waveform replayed on F0: genes 0..5 with
//      the printed inputs North=00FAAAAA, West=50500000, East=00001111,
//      South=01010000; the printed results of genes 0, 1, 2, 3 and 5
//      (00000000, 51FBBBBB, 7FFFFFFF, 2E044444, 2E544444) are checked;
//   A  fault-free operation of all four columns in parallel (2 cycles);
//   B  three transient faults in input registers 0, 1, 2 of B cell F0,
//      masked by the hybrid redundancy unit (2 cycles, correct result);
//   C  a permanent fault in F0 while it runs gene 13 (0D, the gene whose
//      activation the paper's waveform shows): local healing closes
//      F0, the T cell R0 re-runs the gene (5 cycles), later genes run on R0
//      (2 cycles);
//   D  a permanent fault in R0 while it runs gene 0 (AND): the stem cell
//      takes column 0 over and re-runs the gene (5 cycles), later genes
//      run on S (2 cycles);
//   E  B and T faults in column 2 with the stem cell taken: alarm and
//      col_lost are raised and the column produces nothing.
// Each mechanism is counted; one that never happened counts a failure.
// Unit-delay genes are included, so each cell's own delay state is modelled.
module tb_shc_top;
  import shc_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  col_t cfg_col = 0;
  addr_t cfg_addr = 0;
  gene_t cfg_gene;
  logic [N_COLS-1:0] col_trigger = 0;
  addr_t col_addr [N_COLS];
  word_t col_din [N_COLS][N_IN];
  word_t dout [N_COLS];
  logic [N_COLS-1:0] done, pf_b, pf_t, closed, stem_sel, col_lost;
  logic pf_s, stem_valid, alarm;
  col_t stem_col;
  addr_t activate_gene [N_COLS];
  logic [N_COLS:0] syndrome;
  logic [N_CELLS-1:0] tf_seen;
  tf_inj_t tf_inj [N_CELLS];
  word_t pf_mask [N_CELLS];

  shc_top dut (.*);

  always #5 clk = ~clk;

  gene_t genome [N_COLS][GENOME_DEPTH];
  word_t st_model [N_CELLS][N_COLS][GENOME_DEPTH];  // delay state of each cell
  int owner [N_COLS];                               // cell index that serves the column
  int checks = 0, failures = 0;
  int n_normal = 0, n_tf_masked = 0, n_b_to_t = 0, n_t_to_s = 0, n_alarm = 0, n_lost = 0, n_delay = 0;

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] want);
    checks++;
    if (got !== want) begin
      failures++;
      $display("FAIL %s: got %h want %h at %0t", what, got, want, $time);
    end
  endtask

  // Run one gene on column k; exp_lat = expected cycles from trigger to done
  // (0: no done expected). new_owner = cell that produces the result.
  task automatic run_op(input int k, input addr_t a, input int exp_lat, input int new_owner,
                        input int upset_reg = -1);
    logic [63:0] exp;
    int lat;
    word_t d [N_IN];
    foreach (d[i]) d[i] = (($urandom & 3) == 0) ? 32'($urandom & 1) : $urandom;
    if (k == 0 && a == 13) begin
      d[0] = 32'h00FAAAAA; d[1] = 32'h50500000; d[2] = 32'h00001111; d[3] = 32'h01010000;
    end
    exp = ref_gfb(genome[k][a], d[0], d[1], d[2], d[3], st_model[new_owner][k][a]);
    @(negedge clk);
    col_addr[k] = a;
    foreach (d[i]) col_din[k][i] = d[i];
    col_trigger[k] = 1;
    if (upset_reg >= 0) begin
      tf_inj[owner[k]].en = 1;
      tf_inj[owner[k]].reg_sel = 2'(upset_reg);
      tf_inj[owner[k]].copy = 2'($urandom_range(0, 2));
      tf_inj[owner[k]].flip = $urandom | 32'h8000_0001;
    end
    @(negedge clk);
    col_trigger[k] = 0;
    if (upset_reg >= 0) begin
      tf_inj[owner[k]].en = 0;
      check("upset seen", 32'(tf_seen[owner[k]]), 1);
      if (tf_seen[owner[k]]) n_tf_masked++;
    end
    lat = 1;
    while (!done[k] && lat < 12) begin
      @(negedge clk);
      lat++;
    end
    if (exp_lat == 0) begin
      check($sformatf("col %0d no done", k), 32'(done[k]), 0);
    end else begin
      check($sformatf("col %0d latency", k), lat, exp_lat);
      check($sformatf("col %0d gene %0d op %0d", k, a, genome[k][a].opcode), dout[k], exp[31:0]);
      st_model[new_owner][k][a] = exp[63:32];
      if (genome[k][a].opcode == OP_DELAY) n_delay++;
      if (exp_lat == 2) n_normal++;
    end
    owner[k] = new_owner;
  endtask

  initial begin
    foreach (tf_inj[c]) tf_inj[c] = '0;
    foreach (pf_mask[c]) pf_mask[c] = '0;
    foreach (col_addr[k]) col_addr[k] = '0;
    foreach (col_din[k, i]) col_din[k][i] = '0;
    foreach (st_model[c, k, a]) st_model[c][k][a] = '0;
    foreach (owner[k]) owner[k] = k;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // configuration: gene a of column 0 runs opcode a (gene 13 is AND, the
    // waveform's faulted gene); the other columns get random genes
    for (int k = 0; k < N_COLS; k++) begin
      for (int a = 0; a < GENOME_DEPTH; a++) begin
        if (k == 0) genome[k][a] = mk_gene((a == 13) ? 0 : a % 14, 4'b0, 8'(a));
        else        genome[k][a] = mk_gene($urandom_range(0, 13), 4'($urandom & $urandom),
                                           8'(16 * k + a), int'($urandom), int'($urandom));
        @(negedge clk);
        cfg_we = 1; cfg_col = col_t'(k); cfg_addr = addr_t'(a); cfg_gene = genome[k][a];
      end
    end
    @(negedge clk); cfg_we = 0;

    // W: waveform replay on column 0 (gene a of column 0 runs opcode a)
    begin
      word_t fig_out [6] = '{32'h00000000, 32'h51FBBBBB, 32'h7FFFFFFF, 32'h2E044444, 32'h0, 32'h2E544444};
      for (int a = 0; a < 6; a++) begin
        @(negedge clk);
        col_addr[0] = addr_t'(a);
        col_din[0][0] = 32'h00FAAAAA; col_din[0][1] = 32'h50500000;
        col_din[0][2] = 32'h00001111; col_din[0][3] = 32'h01010000;
        col_trigger[0] = 1;
        @(negedge clk);
        col_trigger[0] = 0;
        @(negedge clk);
        check("waveform done", 32'(done[0]), 1);
        if (a != 4) check($sformatf("waveform gene %0d", a), dout[0], fig_out[a]);
      end
    end

    // A: fault-free, all columns in parallel
    fork
      for (int r = 0; r < 40; r++) run_op(0, addr_t'(r), 2, 0);
      for (int r = 0; r < 40; r++) run_op(1, addr_t'($urandom), 2, 1);
      for (int r = 0; r < 40; r++) run_op(2, addr_t'($urandom), 2, 2);
      for (int r = 0; r < 40; r++) run_op(3, addr_t'($urandom), 2, 3);
    join

    // B: three transient faults in F0's input registers
    for (int r = 0; r < 3; r++) run_op(0, addr_t'(r + 1), 2, 0, r);
    check("no pf after transients", 32'(pf_b), 0);

    // C: permanent fault in F0 while it runs gene 13
    pf_mask[0] = 32'hFFFF_FFFF;
    run_op(0, addr_t'(13), 5, N_COLS + 0);
    check("F0 pf", 32'(pf_b[0]), 1);
    check("col 0 closed", 32'(closed[0]), 1);
    check("activate gene", 32'(activate_gene[0]), 13);
    if (closed[0] && dout[0] == 0) n_b_to_t++;
    for (int r = 0; r < 10; r++) run_op(0, addr_t'($urandom), 2, N_COLS + 0);
    run_op(0, addr_t'(12), 2, N_COLS + 0, 3);  // transient in the T cell too

    // D: permanent fault in R0
    pf_mask[N_COLS + 0] = 32'hFFFF_FFFF;
    run_op(0, addr_t'(0), 5, 2 * N_COLS);
    check("R0 pf", 32'(pf_t[0]), 1);
    check("stem valid", 32'(stem_valid), 1);
    check("stem col", 32'(stem_col), 0);
    check("stem sel", 32'(stem_sel), 1);
    check("syndrome", 32'(syndrome), 1);
    check("no alarm yet", 32'(alarm), 0);
    if (stem_sel[0]) n_t_to_s++;
    fork
      for (int r = 0; r < 20; r++) run_op(0, addr_t'($urandom), 2, 2 * N_COLS);
      for (int r = 0; r < 20; r++) run_op(1, addr_t'($urandom), 2, 1);
    join

    // E: column 2 loses B and T while the stem cell is taken
    genome[2][7] = mk_gene(OP_AND);
    @(negedge clk); cfg_we = 1; cfg_col = 2; cfg_addr = 7; cfg_gene = genome[2][7];
    @(negedge clk); cfg_we = 0;
    pf_mask[2] = 32'hFFFF_FFFF;
    run_op(2, addr_t'(7), 5, N_COLS + 2);
    pf_mask[N_COLS + 2] = 32'hFFFF_FFFF;
    run_op(2, addr_t'(7), 0, N_COLS + 2);
    check("alarm", 32'(alarm), 1);
    check("col 2 lost", 32'(col_lost[2]), 1);
    check("col 0 not lost", 32'(col_lost[0]), 0);
    check("stem stays on col 0", 32'(stem_sel), 1);
    if (alarm) n_alarm++;
    if (col_lost[2]) n_lost++;
    run_op(0, addr_t'(2), 2, 2 * N_COLS);
    run_op(3, addr_t'(2), 2, 3);

    $display("mechanisms: normal=%0d transient_masked=%0d b_to_t=%0d t_to_s=%0d alarm=%0d col_lost=%0d delay=%0d",
             n_normal, n_tf_masked, n_b_to_t, n_t_to_s, n_alarm, n_lost, n_delay);
    if (n_normal == 0)    begin failures++; $display("FAIL no fault-free operation"); end
    if (n_tf_masked < 3)  begin failures++; $display("FAIL transient faults not all seen"); end
    if (n_b_to_t == 0)    begin failures++; $display("FAIL no B-to-T healing"); end
    if (n_t_to_s == 0)    begin failures++; $display("FAIL no T-to-stem healing"); end
    if (n_alarm == 0)     begin failures++; $display("FAIL no alarm"); end
    if (n_lost == 0)      begin failures++; $display("FAIL no lost column"); end
    if (n_delay == 0)     begin failures++; $display("FAIL no unit delay executed"); end
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
