// tb_ccs - cruise control system (CCS) run on the tile.
//
// Workload: six inputs (Brake, Enable, Set, Actual speed, Increment,
// Decrement) and two outputs (Target speed, Throttle). Target speed follows
// the four operating rules: Set -> target = actual speed, Decrement ->
// target - 1, Increment -> target + 1, Cancel/Brake -> target = 0 (here
// also when Enable is low). Throttle comes from a PI controller with the
// constants printed in the block diagram: 0.02 * error plus an integral
// of 0.01 * error clamped to [-5, 5]. Speeds are Q16.16 numbers, Booleans
// whole words (7FFFFFFF = true).
//
// The cells (FCn named after the diagram where the operation matches):
//   bottom logic: FC10 tp + 1, FC11 tp - 1, FC8 Increment ? FC10 : tp,
//                 FC7 Decrement ? FC11 : FC8
//   top logic:    FC1 NOT Enable, FC4 Brake OR FC1, FC5 Set ? actual : FC7,
//                 FC2 FC4 ? 0 : FC5  (target), FC6 target - actual (error)
//   PI:           FC12 0.02 * error, FC13 0.01 * error, FC14 FC13 + ip,
//                 FC15 clamp(FC14, -5, 5)  (integral), FC17 FC12 + FC15
// tp and ip are the target and integral of the previous control step,
// held in the output registers of FC2 and FC15; they play the part of the
// diagram's delay cells. This is one reading of the diagram: its wiring is
// not fully legible, so the cell-by-cell mapping is this test's own.
//
// 14 cells are executed per control step in 10 levels on the four
// columns. Permanent faults are injected into B cell F1 and later into
// T cell R1, and transient faults into input registers of F3; target and
// throttle must match the directly computed values at every step.
module tb_ccs;
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

  localparam word_t T = 32'h7FFF_FFFF;
  localparam word_t F = 32'h0;
  int checks = 0, failures = 0;
  int n_tf = 0;
  int cycles, fault_free_cycles = 0, worst_cycles = 0;

  // step state
  logic [N_COLS-1:0] use_col;
  addr_t s_addr [N_COLS];
  word_t s_in [N_COLS][N_IN];
  word_t s_out [N_COLS];

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] want);
    checks++;
    if (got !== want) begin
      failures++;
      $display("FAIL %s: got %h want %h at %0t", what, got, want, $time);
    end
  endtask

  task automatic load(input int k, input int a, input gene_t g);
    @(negedge clk);
    cfg_we = 1; cfg_col = col_t'(k); cfg_addr = addr_t'(a); cfg_gene = g;
    @(negedge clk);
    cfg_we = 0;
  endtask

  // run the genes of one level on the columns in use_col, in parallel
  task automatic step(input bit upset);
    logic [N_COLS-1:0] got;
    int n;
    @(negedge clk);
    for (int k = 0; k < N_COLS; k++) begin
      col_addr[k] = s_addr[k];
      for (int i = 0; i < N_IN; i++) col_din[k][i] = s_in[k][i];
    end
    col_trigger = use_col;
    if (upset) begin
      tf_inj[3].en = 1; tf_inj[3].reg_sel = 2'($urandom); tf_inj[3].copy = 2'($urandom_range(0, 2));
      tf_inj[3].flip = $urandom | 1;
    end
    got = '0;
    n = 0;
    @(posedge clk);
    while ((got & use_col) != use_col && n < 12) begin
      @(negedge clk);
      col_trigger = '0;
      if (tf_inj[3].en && tf_seen[3]) n_tf++;
      tf_inj[3].en = 0;
      for (int k = 0; k < N_COLS; k++) if (done[k] && use_col[k]) begin
        got[k] = 1; s_out[k] = dout[k];
      end
      n++;
    end
    cycles += n + 1;
    if ((got & use_col) != use_col) begin
      failures++;
      $display("FAIL level did not complete at %0t", $time);
    end
  endtask

  task automatic set_op(input int k, input int a, input word_t i0, i1 = T, i2 = T, i3 = T);
    use_col[k] = 1; s_addr[k] = addr_t'(a);
    s_in[k][0] = i0; s_in[k][1] = i1; s_in[k][2] = i2; s_in[k][3] = i3;
  endtask

  localparam int ONE = 65536;
  localparam int KP  = 1311;        // 0.02 in Q16.16
  localparam int KI  = 655;         // 0.01 in Q16.16
  localparam int LIM = 5 * 65536;   // integral limit

  function automatic word_t b(input logic v);
    return v ? T : F;
  endfunction

  function automatic longint mulq(input longint x, input longint k);
    return (x * k) >>> 16;
  endfunction

  // one control step through the tile
  task automatic control_step(input logic brake, enable, set, incr, decr, input word_t actual,
                              input bit upset, inout word_t tp, inout word_t ip, output word_t thr);
    word_t fc1, fc2, fc4, fc5, fc6, fc7, fc8, fc10, fc11, fc12, fc13, fc14;
    cycles = 0;
    use_col = '0;
    set_op(0, 0, tp);                  // FC10
    set_op(1, 0, tp);                  // FC11
    set_op(2, 0, b(enable));           // FC1
    set_op(3, 0, F);                   // spare work on column 3: keeps F3 busy
    step(upset);
    fc10 = s_out[0]; fc11 = s_out[1]; fc1 = s_out[2];
    use_col = '0;
    set_op(0, 1, fc10, b(incr), tp);   // FC8
    set_op(2, 1, b(brake), fc1);       // FC4
    step(0);
    fc8 = s_out[0]; fc4 = s_out[2];
    use_col = '0;
    set_op(0, 2, fc11, b(decr), fc8);  // FC7
    step(0);
    fc7 = s_out[0];
    set_op(0, 3, actual, b(set), fc7); // FC5
    step(0);
    fc5 = s_out[0];
    set_op(0, 4, F, fc4, fc5);         // FC2 (In1 replaced by constant 0)
    step(0);
    fc2 = s_out[0];
    set_op(0, 5, fc2, actual);         // FC6
    step(0);
    fc6 = s_out[0];
    use_col = '0;
    set_op(1, 1, fc6);                 // FC12
    set_op(2, 2, fc6);                 // FC13
    step(upset);
    fc12 = s_out[1]; fc13 = s_out[2];
    use_col = '0;
    set_op(2, 3, fc13, ip);            // FC14
    step(0);
    fc14 = s_out[2];
    set_op(2, 4, fc14);                // FC15
    step(0);
    ip = s_out[2];
    use_col = '0;
    set_op(1, 2, fc12, ip);            // FC17
    step(0);
    thr = s_out[1];
    tp = fc2;
  endtask

  initial begin
    logic brake, enable, set, incr, decr;
    word_t actual, tp, ip, thr;
    longint t_ref, i_ref, e_ref, p_ref, thr_ref, ts;
    foreach (tf_inj[c]) tf_inj[c] = '0;
    foreach (pf_mask[c]) pf_mask[c] = '0;
    foreach (col_addr[k]) col_addr[k] = '0;
    foreach (col_din[k, i]) col_din[k][i] = '0;
    foreach (s_out[k]) s_out[k] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    load(0, 0, mk_gene(OP_ADD, 4'b1110, 0, ONE, 0));      // FC10: tp + 1
    load(1, 0, mk_gene(OP_SUB, 4'b0010, 0, ONE, 0));      // FC11: tp - 1
    load(2, 0, mk_gene(OP_NOT));                          // FC1
    load(3, 0, mk_gene(OP_BUF));
    load(0, 1, mk_gene(OP_MUX));                          // FC8
    load(2, 1, mk_gene(OP_OR, 4'b1100, 0, 0, 0));         // FC4
    load(0, 2, mk_gene(OP_MUX));                          // FC7
    load(0, 3, mk_gene(OP_MUX));                          // FC5
    load(0, 4, mk_gene(OP_MUX, 4'b0001, 0, 0, 0));        // FC2
    load(0, 5, mk_gene(OP_SUB));                          // FC6
    load(1, 1, mk_gene(OP_MUL, 4'b0010, 0, KP, 0));       // FC12
    load(2, 2, mk_gene(OP_MUL, 4'b0010, 0, KI, 0));       // FC13
    load(2, 3, mk_gene(OP_ADD, 4'b1100, 0, 0, 0));        // FC14
    load(2, 4, mk_gene(OP_CMP, 4'b0110, 0, LIM, -LIM));   // FC15
    load(1, 2, mk_gene(OP_ADD, 4'b1100, 0, 0, 0));        // FC17

    tp = F; ip = F; t_ref = 0; i_ref = 0;
    actual = word_t'(60 * ONE);
    for (int n = 0; n < 250; n++) begin
      brake = ($urandom_range(0, 40) == 0);
      enable = ($urandom_range(0, 30) != 0);
      set = ($urandom_range(0, 8) == 0);
      incr = ($urandom_range(0, 5) == 0);
      decr = ($urandom_range(0, 5) == 0);
      actual = word_t'(longint'(signed'(actual)) + $urandom_range(0, 2 * ONE) - ONE);
      if (n == 80)  pf_mask[1] = T;           // permanent fault in F1
      if (n == 160) pf_mask[N_COLS + 1] = T;  // permanent fault in R1
      control_step(brake, enable, set, incr, decr, actual, (n % 5) == 2, tp, ip, thr);
      // direct computation
      ts = decr ? t_ref - ONE : incr ? t_ref + ONE : t_ref;
      if (set) ts = sx32(actual);
      t_ref = (brake || !enable) ? 0 : ts;
      t_ref = sx32(32'(t_ref));
      e_ref = sx32(32'(t_ref - sx32(actual)));
      p_ref = sx32(32'(mulq(e_ref, KP)));
      i_ref = sx32(32'(i_ref + sx32(32'(mulq(e_ref, KI)))));
      if (i_ref > LIM) i_ref = LIM;
      if (i_ref < -LIM) i_ref = -LIM;
      thr_ref = sx32(32'(p_ref + i_ref));
      check($sformatf("step %0d target", n), tp, 32'(t_ref));
      check($sformatf("step %0d throttle", n), thr, 32'(thr_ref));
      if (n < 80 && fault_free_cycles == 0) fault_free_cycles = cycles;
      if (cycles > worst_cycles) worst_cycles = cycles;
    end
    check("F1 closed", 32'(closed[1]), 1);
    check("R1 replaced by S", 32'(stem_sel[1]), 1);
    $display("CCS: %0d cycles per control step fault-free, %0d worst with healing; transient=%0d",
             fault_free_cycles, worst_cycles, n_tf);
    if (n_tf == 0) begin failures++; $display("FAIL no transient fault masked"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
