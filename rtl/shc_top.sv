// shc_top - one self-healing tile: critical service layer, four local
// healing layers and the global healing layer.
//
// Critical service layer: four columns. Column k has an active B cell (Fk),
// a passive pre-generated T cell (Rk) with the same genome, a transfer
// inputs unit in front of the T cell and an output MUX driving DOk.
// Local healing layer k watches Bk. Global healing layer: health syndrome,
// syndrome switching circuit, re-routing unit and the stem cell S, which
// holds the genomes of all four columns.
//
// Three lines of defence:
//   1. transient faults in a cell's input registers are voted away by its
//      hybrid redundancy unit - no visible effect, no extra cycle;
//   2. a permanent fault in Bk (self-checking unit) makes local healing
//      layer k close Bk's output, route the column to Rk and re-run the
//      failed gene there: that result comes 3 cycles later than normal;
//   3. a permanent fault in Rk, found while Rk runs a gene for the column,
//      gives the column to S, which re-runs the gene: also 3 cycles late.
//      S is a single spare (alarm on a second T-cell failure).
//
// Interface. Configuration: cfg_we writes cfg_gene at cfg_addr into the
// genome of column cfg_col in Bk, Rk and S at once. Operation, per column:
// raise col_trigger[k] for one cycle with col_addr[k] (gene) and col_din[k]
// (North, West, East, South) valid, hold addr and data until done[k]; done[k]
// pulses with dout[k] 2 cycles after the trigger, or 5 cycles after it when
// a permanent fault is found in the cell that runs the gene. Fault injection
// inputs (tf_inj, pf_mask; cells 0-3 = B, 4-7 = T, 8 = S) reproduce the
// paper's experiments; tie them to zero in use.
module shc_top
  import shc_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  // configuration
  input  logic                cfg_we,
  input  col_t                cfg_col,
  input  addr_t               cfg_addr,
  input  gene_t               cfg_gene,
  // columns (DI / DO)
  input  logic [N_COLS-1:0]   col_trigger,
  input  addr_t               col_addr [N_COLS],
  input  word_t               col_din  [N_COLS][N_IN],
  output word_t               dout     [N_COLS],
  output logic [N_COLS-1:0]   done,
  // health status
  output logic [N_COLS-1:0]   pf_b,
  output logic [N_COLS-1:0]   pf_t,
  output logic                pf_s,
  output logic [N_COLS-1:0]   closed,
  output addr_t               activate_gene [N_COLS],
  output logic                stem_valid,
  output col_t                stem_col,
  output logic [N_COLS-1:0]   stem_sel,
  output logic [N_COLS:0]     syndrome,
  output logic [N_COLS-1:0]   col_lost,
  output logic                alarm,
  output logic [N_CELLS-1:0]  tf_seen,
  // fault injection
  input  tf_inj_t             tf_inj  [N_CELLS],
  input  word_t               pf_mask [N_CELLS]
);

  // ---------------- critical service layer + local healing layers --------
  word_t       close_output [N_COLS];
  logic [N_COLS-1:0] retry, b_done, t_done;
  word_t       b_dout [N_COLS], t_dout [N_COLS];
  logic [N_COLS-1:0] t_trigger;
  addr_t       t_addr [N_COLS];
  word_t       t_din  [N_COLS][N_IN];
  logic        s_done, s_trigger, stem_retry, stem_active;
  word_t       s_dout;
  addr_t       s_addr;
  word_t       s_din [N_IN];

  logic [N_COLS-1:0] unused_busy_b, unused_busy_t, cfg_hit;
  gene_t       unused_gene_b [N_COLS], unused_gene_t [N_COLS];

  for (genvar k = 0; k < N_COLS; k++) begin : g_col
    assign cfg_hit[k] = cfg_we && (cfg_col == col_t'(k));

    bio_cell #(.N_GENOMES(1)) u_b (
      .clk, .rst_n,
      .cfg_we(cfg_hit[k]), .cfg_sel(2'd0), .cfg_addr, .cfg_gene,
      .trigger(col_trigger[k]), .gsel(2'd0), .addr(col_addr[k]), .din(col_din[k]),
      .done(b_done[k]), .dout(b_dout[k]), .busy(unused_busy_b[k]), .gene(unused_gene_b[k]),
      .pf(pf_b[k]), .tf_seen(tf_seen[k]),
      .tf(tf_inj[k]), .pf_mask(pf_mask[k])
    );

    local_heal u_lh (
      .clk, .rst_n, .pf_b(pf_b[k]), .b_addr(col_addr[k]),
      .close_output(close_output[k]), .select_inputs(closed[k]),
      .activate_gene(activate_gene[k]), .retry(retry[k])
    );

    transfer_inputs u_ti (
      .select_inputs(closed[k]), .retry(retry[k]), .activate_gene(activate_gene[k]),
      .col_trigger(col_trigger[k]), .col_addr(col_addr[k]), .col_din(col_din[k]),
      .t_trigger(t_trigger[k]), .t_addr(t_addr[k]), .t_din(t_din[k])
    );

    bio_cell #(.N_GENOMES(1)) u_t (
      .clk, .rst_n,
      .cfg_we(cfg_hit[k]), .cfg_sel(2'd0), .cfg_addr, .cfg_gene,
      .trigger(t_trigger[k]), .gsel(2'd0), .addr(t_addr[k]), .din(t_din[k]),
      .done(t_done[k]), .dout(t_dout[k]), .busy(unused_busy_t[k]), .gene(unused_gene_t[k]),
      .pf(pf_t[k]), .tf_seen(tf_seen[N_COLS+k]),
      .tf(tf_inj[N_COLS+k]), .pf_mask(pf_mask[N_COLS+k])
    );

    out_mux u_mux (
      .close_output(close_output[k]), .sel_t(closed[k]), .sel_s(stem_sel[k]),
      .b_dout(b_dout[k]), .b_done(b_done[k]),
      .t_dout(t_dout[k]), .t_done(t_done[k]),
      .s_dout, .s_done,
      .dout(dout[k]), .done(done[k])
    );

    assign col_lost[k] = closed[k] && pf_t[k] && !(stem_sel[k] && !pf_s);
  end

  // ---------------- global healing layer ----------------------------------
  health_syndrome u_hs (
    .clk, .rst_n, .pf_t, .pf_s,
    .syndrome, .syn_valid(stem_valid), .syn_col(stem_col), .alarm
  );

  syndrome_switch u_sw (
    .clk, .rst_n, .syn_valid(stem_valid), .syn_col(stem_col), .closed,
    .stem_sel, .stem_retry
  );

  assign stem_active = |stem_sel;

  reroute_unit u_rr (
    .active(stem_active), .sel_col(stem_col), .stem_retry,
    .col_trigger, .col_addr, .col_din,
    .s_trigger, .s_addr, .s_din
  );

  logic  unused_busy_s;
  gene_t unused_gene_s;

  bio_cell #(.N_GENOMES(N_COLS)) u_s (
    .clk, .rst_n,
    .cfg_we, .cfg_sel(2'(cfg_col)), .cfg_addr, .cfg_gene,
    .trigger(s_trigger), .gsel(2'(stem_col)), .addr(s_addr), .din(s_din),
    .done(s_done), .dout(s_dout), .busy(unused_busy_s), .gene(unused_gene_s),
    .pf(pf_s), .tf_seen(tf_seen[2*N_COLS]),
    .tf(tf_inj[2*N_COLS]), .pf_mask(pf_mask[2*N_COLS])
  );

  // the stem cell serves at most one column, and only a closed one
  a_stem_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(stem_sel))
    else $error("stem cell selected for several columns");
  a_stem_closed: assert property (@(posedge clk) disable iff (!rst_n) (stem_sel & ~closed) == '0)
    else $error("stem cell serves a column whose B cell is alive");

endmodule
