// bio_cell - bio-operational functional cell (B cell, T cell or stem cell).
//
// One module serves all three roles of the paper: the active B cell that
// runs the application, the passive pre-generated T cell that takes over a
// failed B cell, and the stem cell that can take over any column. A cell
// holds N_GENOMES genomes of DEPTH genes each (1 for B and T cells, one per
// column for the stem cell) in its configuration memory, four input
// registers protected by the hybrid redundancy unit, the GFB, a checker GFB
// and the self-checking unit.
//
// Operation (the paper shows a Trigger/Done pair per cell; the cycle counts
// are this design's):
//   cycle 0  trigger high and the cell idle and healthy: din is captured in
//            the hybrid registers, the gene at {gsel, addr} is read into the
//            active-gene register.
//   cycle 1  both GFBs evaluate; the self-checking unit compares them.
//            Equal: dout, the delay state and done are written.
//            Different: pf is latched, done stays low.
//   cycle 2  done is high for one cycle with the result on dout.
// A cell with pf set ignores triggers: it is dead until reset.
//
// Fault injection ports model the experiments of the paper: tf flips bits of
// one copy of one input register (transient fault, masked by the hybrid
// redundancy unit); pf_mask forces bits of the main GFB's result to 1
// (stuck-at-1, the paper's Permanent_Fault signal), which the self-checking
// unit detects.
module bio_cell
  import shc_pkg::*;
#(
  parameter int unsigned N_GENOMES = 1,
  parameter int unsigned DEPTH     = GENOME_DEPTH
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // configuration write port
  input  logic                 cfg_we,
  input  logic [1:0]           cfg_sel,   // genome (column) for the stem cell
  input  logic [$clog2(DEPTH)-1:0] cfg_addr,
  input  gene_t                cfg_gene,
  // operation
  input  logic                 trigger,
  input  logic [1:0]           gsel,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  word_t                din [N_IN],
  output logic                 done,
  output word_t                dout,
  output logic                 busy,
  output gene_t                gene,      // active genetic code
  // health
  output logic                 pf,        // permanent fault latched
  output logic                 tf_seen,   // input copies disagreed this cycle
  // fault injection
  input  tf_inj_t              tf,
  input  word_t                pf_mask
);

  localparam int unsigned AW  = $clog2(DEPTH);
  localparam int unsigned GW  = (N_GENOMES > 1) ? $clog2(N_GENOMES) : 1;
  localparam int unsigned MAW = (N_GENOMES > 1) ? AW + GW : AW;

  logic [MAW-1:0] waddr, raddr, aaddr;
  gene_t          rgene;
  word_t          q [N_IN];
  logic [N_IN-1:0] rerr;
  word_t          st [N_GENOMES*DEPTH];
  word_t          y_main, y_chk, s_main, s_chk;
  logic           exec, mismatch, start;

  if (N_GENOMES > 1) begin : g_multi
    assign waddr = {cfg_sel[GW-1:0], cfg_addr};
    assign raddr = {gsel[GW-1:0], addr};
  end else begin : g_single
    assign waddr = cfg_addr;
    assign raddr = addr;
  end

  genome_mem #(.DEPTH(N_GENOMES*DEPTH), .AW(MAW)) u_mem (
    .clk, .we(cfg_we), .waddr, .wdata(cfg_gene), .raddr, .rdata(rgene)
  );

  assign start = trigger && !busy && !pf;

  for (genvar i = 0; i < N_IN; i++) begin : g_in
    hybrid_reg #(.W(DATA_W)) u_reg (
      .clk, .rst_n,
      .load(start), .d(din[i]),
      .inj_en(tf.en && tf.reg_sel == 2'(i)), .inj_copy(tf.copy), .inj_flip(tf.flip),
      .q(q[i]), .err(rerr[i])
    );
  end
  assign tf_seen = |rerr;

  // main and checker GFB
  gfb u_gfb_main (.gene, .in(q), .st(st[aaddr]), .y(y_main), .st_nxt(s_main));
  gfb u_gfb_chk  (.gene, .in(q), .st(st[aaddr]), .y(y_chk),  .st_nxt(s_chk));

  self_check #(.W(2*DATA_W)) u_chk (
    .clk, .rst_n, .chk(exec),
    .a({y_main | pf_mask, s_main}), .b({y_chk, s_chk}),
    .mismatch, .pf
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      exec  <= 1'b0;
      done  <= 1'b0;
      dout  <= '0;
      gene  <= '0;
      aaddr <= '0;
      for (int i = 0; i < N_GENOMES*DEPTH; i++) st[i] <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy  <= 1'b1;
        exec  <= 1'b1;
        gene  <= rgene;
        aaddr <= raddr;
      end else if (exec) begin
        busy <= 1'b0;
        exec <= 1'b0;
        if (!mismatch) begin
          dout      <= y_main | pf_mask;
          done      <= 1'b1;
          st[aaddr] <= s_main;
        end
      end
    end
  end

  // handshake rules
  a_done_pulse: assert property (@(posedge clk) disable iff (!rst_n) done |=> !done)
    else $error("done must be a one-cycle pulse");
  a_latency: assert property (@(posedge clk) disable iff (!rst_n) start |=> ##1 (done || pf))
    else $error("no result or fault two cycles after a trigger");
  a_no_done_on_fault: assert property (@(posedge clk) disable iff (!rst_n) (exec && mismatch) |=> !done)
    else $error("a result that failed the self-check was released");

endmodule
