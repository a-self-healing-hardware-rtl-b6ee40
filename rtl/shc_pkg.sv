// shc_pkg - shared types and constants of the self-healing tile.
//
// A tile is one critical service layer of four columns. Every column has an
// active B cell, a passive T cell, a local healing layer and an output MUX;
// one stem cell in the global healing layer can stand in for any column.
// Every functional cell executes a 66-bit genetic code (gene) on four 32-bit
// input words (North, West, East, South).
//
// Sizes that follow the paper: 4 B cells, 4 T cells, 1 stem cell, 66-bit
// genes, 32-bit data words and four input words per cell (the waveforms
// print 8-hex-digit data and four inputs). The gene's field layout, the
// opcode encoding, the Q16.16 number format and the genome depth of 16 are
// this design's own choices: the paper does not give them.
package shc_pkg;

  localparam int unsigned DATA_W       = 32;  // data word (8 hex digits in the waveforms)
  localparam int unsigned N_IN         = 4;   // North, West, East, South
  localparam int unsigned N_COLS       = 4;   // four B cells / four T cells
  localparam int unsigned GENE_W       = 66;  // "66-bit genetic code"
  localparam int unsigned GENOME_DEPTH = 16;  // genes per column (assumed)
  localparam int unsigned ADDR_W       = $clog2(GENOME_DEPTH);
  localparam int unsigned COL_W        = $clog2(N_COLS);
  localparam int unsigned FRAC         = 16;  // Q16.16 fixed point for MUL
  localparam int unsigned K_W          = 24;  // width of each gene constant
  localparam int unsigned N_CELLS      = 2 * N_COLS + 1;  // B0..B3, T0..T3, S

  typedef logic [DATA_W-1:0] word_t;
  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [COL_W-1:0]  col_t;

  // Operations of the generic functional block. Logic operations act bitwise
  // on all four inputs; true is 7FFFFFFF (or any word with bit 0 set).
  typedef enum logic [5:0] {
    OP_AND   = 6'd0,   // In1 & In2 & In3 & In4
    OP_OR    = 6'd1,   // In1 | In2 | In3 | In4
    OP_NAND  = 6'd2,   // complements are 31-bit: bit 31 of the result is 0
    OP_NOR   = 6'd3,
    OP_XOR   = 6'd4,
    OP_XNOR  = 6'd5,
    OP_NOT   = 6'd6,   // ~In1, 31-bit
    OP_BUF   = 6'd7,   // In1
    OP_ADD   = 6'd8,   // In1 + In2 + In3 + In4 (two's complement)
    OP_SUB   = 6'd9,   // In1 - In2
    OP_MUL   = 6'd10,  // (In1 * In2) >>> FRAC, Q16.16
    OP_MUX   = 6'd11,  // (In2 != 0) ? In1 : In3
    OP_DELAY = 6'd12,  // unit delay: returns the In1 of the previous execution
    OP_CMP   = 6'd13   // In1 compared with the bounds In2, In3 and clamped
  } opcode_t;

  // Genetic code, 66 bits: 6 + 4 + 8 + 24 + 24.
  //   cmask[i] replaces input i by a constant: inputs 0 and 1 by k0,
  //   inputs 2 and 3 by k1 (sign-extended to 32 bits).
  //   xy is the cell position printed as Current_XY in the waveforms.
  typedef struct packed {
    opcode_t               opcode;
    logic [N_IN-1:0]       cmask;
    logic [7:0]            xy;
    logic signed [K_W-1:0] k0;
    logic signed [K_W-1:0] k1;
  } gene_t;

  // Transient-fault (single event upset) injection into one input register copy.
  typedef struct packed {
    logic       en;
    logic [1:0] reg_sel;  // which of the four input registers
    logic [1:0] copy;     // which of its three copies
    word_t      flip;     // bits to invert
  } tf_inj_t;

endpackage
