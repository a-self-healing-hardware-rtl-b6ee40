// tb_edg - emergency diesel generator (EDG) start logic run on the tile.
//
// Workload: the EDG start logic has 14 digital inputs and two outputs,
// EngineStart and OpenAirStartFuel_Valves, built from AND, OR and NOT
// gates. Each gate is one gene executed by one functional cell; the 15
// genes are spread over the four columns and executed level by level (a
// column runs one gene per level, the test bench carries each result to
// the gates that use it). Booleans are whole words: 7FFFFFFF is true, 0 false.
//
// Gate list (g = gene, column:address):
//   g1  0:0  OR  (engine_shutdown, reset_start)       g2  0:1  NOT g1
//   g3  1:0  OR  (primary_xtie, backup_xtie)          g4  1:1  AND (g3, edg_out_brkr)
//   g5  0:2  NOT g4
//   g6  2:0  OR  (esf_si, vital_bus_uv, manual_start, EngineStart of the
//               previous evaluation)  - the seal-in feedback line
//   g7  0:3  AND (g2, g5, g6)          -> EngineStart
//   g8a 3:0  NOT low_jacket_water     g8b 2:1  NOT engine_trouble
//   g8c 3:1  NOT barring_gear
//   g9a 1:2  NOT bottom input 0       g9b 2:2  NOT bottom input 1
//   g10a 1:3 AND (bottom input 2, g8a, g8b, g8c)
//   g10b 0:4 AND (g10a, g7)            the five-input AND as two cells
//   g11 0:5  AND (g9a, g9b, g10b)      -> OpenAirStartFuel_Valves
// Bottom inputs 0..2 are, left to right, the DIs labelled Air Tank
// Pressure, Engine/Crank Speed and Starting Control/Power Available (the
// dashed label lines of the logic diagram are read as nested, outermost
// label to the farthest input). The diagram labels only its AND and OR
// gates; its crossed boxes are taken as the NOT gates that the
// description of the logic names. The line from the start AND back to the
// inputs of the start OR is taken as a seal-in, so EngineStart of the
// previous evaluation is a fourth input of g6.
//
// During the run the test injects transient faults and permanent faults
// into B cell F0 and then T cell R0 (the paper's fault scenario); both
// outputs must stay equal to the directly computed logic throughout. The
// number of clock cycles of one evaluation is reported fault-free and
// with healing.
module tb_edg;
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
  int n_tf = 0, n_heal_t = 0, n_heal_s = 0;
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

  function automatic word_t b(input logic v);
    return v ? T : F;
  endfunction

  // one evaluation of the start logic through the tile
  task automatic evaluate(input logic [13:0] di, input word_t start_prev, input bit upset,
                          output word_t engine_start, output word_t valves);
    word_t g1, g2, g3, g4, g5, g6, g7, g8a, g8b, g8c, g9a, g9b, g10a, g10b;
    cycles = 0;
    // level 1
    use_col = '0;
    set_op(0, 0, b(di[0]), b(di[1]), F, F);
    set_op(1, 0, b(di[2]), b(di[3]), F, F);
    set_op(2, 0, b(di[5]), b(di[6]), b(di[7]), start_prev);
    set_op(3, 0, b(di[11]));
    step(upset);
    g1 = s_out[0]; g3 = s_out[1]; g6 = s_out[2]; g8a = s_out[3];
    // level 2
    use_col = '0;
    set_op(0, 1, g1);
    set_op(1, 1, g3, b(di[4]));
    set_op(2, 1, b(di[12]));
    set_op(3, 1, b(di[13]));
    step(0);
    g2 = s_out[0]; g4 = s_out[1]; g8b = s_out[2]; g8c = s_out[3];
    // level 3
    use_col = '0;
    set_op(0, 2, g4);
    set_op(1, 2, b(di[8]));
    set_op(2, 2, b(di[9]));
    step(upset);
    g5 = s_out[0]; g9a = s_out[1]; g9b = s_out[2];
    // level 4
    use_col = '0;
    set_op(0, 3, g2, g5, g6);
    set_op(1, 3, b(di[10]), g8a, g8b, g8c);
    step(0);
    g7 = s_out[0]; g10a = s_out[1];
    // level 5, 6
    use_col = '0;
    set_op(0, 4, g10a, g7);
    step(0);
    g10b = s_out[0];
    set_op(0, 5, g9a, g9b, g10b);
    step(0);
    engine_start = g7;
    valves = s_out[0];
  endtask

  initial begin
    logic [13:0] di;
    logic es_ref, valves_ref, es_prev_ref;
    word_t es, vv, es_prev;
    foreach (tf_inj[c]) tf_inj[c] = '0;
    foreach (pf_mask[c]) pf_mask[c] = '0;
    foreach (col_addr[k]) col_addr[k] = '0;
    foreach (col_din[k, i]) col_din[k][i] = '0;
    foreach (s_out[k]) s_out[k] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // genes: unused inputs of OR read constant 0 (k), of AND constant -1
    load(0, 0, mk_gene(OP_OR));
    load(0, 1, mk_gene(OP_NOT));
    load(0, 2, mk_gene(OP_NOT));
    load(0, 3, mk_gene(OP_AND, 4'b1000, 0, 0, -1));
    load(0, 4, mk_gene(OP_AND, 4'b1100, 0, 0, -1));
    load(0, 5, mk_gene(OP_AND, 4'b1000, 0, 0, -1));
    load(1, 0, mk_gene(OP_OR));
    load(1, 1, mk_gene(OP_AND, 4'b1100, 0, 0, -1));
    load(1, 2, mk_gene(OP_NOT));
    load(1, 3, mk_gene(OP_AND));
    load(2, 0, mk_gene(OP_OR));
    load(2, 1, mk_gene(OP_NOT));
    load(2, 2, mk_gene(OP_NOT));
    load(3, 0, mk_gene(OP_NOT));
    load(3, 1, mk_gene(OP_NOT));

    es_prev_ref = 0;
    es_prev = F;
    for (int ev = 0; ev < 300; ev++) begin
      di = 14'($urandom);
      // bias toward starting conditions now and then
      if (ev % 3 == 0) di = di & ~14'b11_1111_0001_0011 | 14'b00_0100_0001_0100;
      if (ev == 100) pf_mask[0] = T;         // permanent fault in F0
      if (ev == 200) pf_mask[N_COLS] = T;    // permanent fault in R0
      evaluate(di, es_prev, (ev % 7) == 3, es, vv);
      // direct logic
      es_ref = !(di[0] | di[1]) & !((di[2] | di[3]) & di[4]) & (di[5] | di[6] | di[7] | es_prev_ref);
      valves_ref = !di[8] & !di[9] & di[10] & !di[11] & !di[12] & !di[13] & es_ref;
      check($sformatf("ev %0d EngineStart", ev), es, es_ref ? T : F);
      check($sformatf("ev %0d OpenAirStartFuel_Valves", ev), vv, valves_ref ? T : F);
      es_prev_ref = es_ref;
      es_prev = es;
      if (ev < 100 && fault_free_cycles == 0) fault_free_cycles = cycles;
      if (cycles > worst_cycles) worst_cycles = cycles;
    end
    if (closed[0]) n_heal_t++;
    if (stem_sel[0]) n_heal_s++;
    check("F0 healed by R0", 32'(closed[0]), 1);
    check("R0 healed by S", 32'(stem_sel[0]), 1);
    $display("EDG: %0d cycles per evaluation fault-free, %0d worst with healing; transient=%0d",
             fault_free_cycles, worst_cycles, n_tf);
    if (n_tf == 0) begin failures++; $display("FAIL no transient fault masked"); end
    check("healing cost", 32'(worst_cycles > fault_free_cycles), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
