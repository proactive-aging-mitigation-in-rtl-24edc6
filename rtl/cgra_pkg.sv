// cgra_pkg: sizes, encodings and configuration formats shared by the
// utilization-aware TransRec-style CGRA.
//
// The fabric is a matrix of ROWS x COLS functional units. Data flows left to
// right over NCTX context lines. A configuration ("virtual configuration") is
// generated for a fabric anchored at row 0 / column 0; at load time it is moved
// to another pivot (row offset, column offset) by the reconfiguration logic.
//
// Sizes that follow the paper: ROWS = 2 and COLS = 16 (the 16x2 "best energy"
// design used for the area results), NCFG = 4 configuration lines (the example
// of the reconfiguration logic), LD_COLS = 4 (a load or store spans four
// columns). Sizes that are this design's own choice: XLEN = 32, NCTX = 8
// context lines, 12-bit immediates, 16 configuration-cache entries, and the
// bit layout of every configuration word below.
package cgra_pkg;

  localparam int XLEN        = 32;  // data path width (RV32 assumed)
  localparam int PCW         = 32;  // program counter width
  localparam int ROWS        = 2;   // W: rows = parallel FUs per column
  localparam int COLS        = 16;  // L: columns = sequential levels
  localparam int NCFG        = 4;   // n: configuration lines
  localparam int NCTX        = 8;   // context lines
  localparam int NREG        = 32;  // GPP architectural registers
  localparam int IMMW        = 12;  // immediate field width
  localparam int LD_COLS     = 4;   // columns spanned by a load or store
  localparam int CFG_ENTRIES = 16;  // configuration-cache entries
  localparam int NOUT        = NCTX;// write-back slots per configuration

  localparam int CTXW  = $clog2(NCTX);
  localparam int ROWW  = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int COLW  = $clog2(COLS);
  localparam int REGW  = $clog2(NREG);
  localparam int NBEAT = COLS / NCFG;  // cycles needed to load all columns

  typedef logic [XLEN-1:0] word_t;
  typedef word_t [NCTX-1:0] ctx_t;

  // FU operation. ALU_NOP marks an unused FU (it computes nothing and counts
  // as idle for utilization purposes).
  typedef enum logic [3:0] {
    ALU_NOP  = 4'd0,
    ALU_ADD  = 4'd1,
    ALU_SUB  = 4'd2,
    ALU_AND  = 4'd3,
    ALU_OR   = 4'd4,
    ALU_XOR  = 4'd5,
    ALU_SLL  = 4'd6,
    ALU_SRL  = 4'd7,
    ALU_SRA  = 4'd8,
    ALU_SLT  = 4'd9,
    ALU_SLTU = 4'd10,
    ALU_PASSB= 4'd11   // result = operand B (lui / li / mv)
  } alu_op_e;

  // Input crossbar setting of one FU: which context line feeds each operand;
  // operand B may be replaced by the sign-extended immediate.
  typedef struct packed {
    logic [CTXW-1:0] sel_a;
    logic [CTXW-1:0] sel_b;
    logic            use_imm;
    logic [IMMW-1:0] imm;
  } imux_cfg_t;

  // Output crossbar setting of one FU row: bit l set means the FU result of
  // this row is propagated on context line l. Kept per row so that vertical
  // movement is a pure rotation of the per-row fields.
  typedef logic [NCTX-1:0] omux_cfg_t;

  // Memory operation of a column. A load issued in virtual column j returns
  // in column j+LD_COLS-1, whose ld_wmask chooses the lines it writes.
  typedef struct packed {
    logic            ld_en;
    logic [CTXW-1:0] ld_base;
    logic [IMMW-1:0] ld_off;
    logic            st_en;
    logic [CTXW-1:0] st_base;
    logic [CTXW-1:0] st_data;
    logic [IMMW-1:0] st_off;
    logic [NCTX-1:0] ld_wmask;
  } mem_cfg_t;

  // Configuration bits of one column (one configuration-line word).
  typedef struct packed {
    imux_cfg_t [ROWS-1:0] imux;
    alu_op_e   [ROWS-1:0] alu;
    omux_cfg_t [ROWS-1:0] omux;
    mem_cfg_t             mem;
  } col_cfg_t;

  // Input context map: context line <- GPP register.
  typedef struct packed {
    logic            v;
    logic [REGW-1:0] r;
  } in_map_t;

  // Output slot, in program order: GPP register rd <- context line.
  typedef struct packed {
    logic            v;
    logic [REGW-1:0] rd;
    logic [CTXW-1:0] line;
  } out_slot_t;

  // Everything the configuration cache keeps for one accelerated sequence
  // besides the column words.
  typedef struct packed {
    logic [PCW-1:0]          next_pc;  // where the GPP resumes
    logic [COLW:0]           ncols;    // columns used, 1..COLS
    in_map_t   [NCTX-1:0]    in_map;
    out_slot_t [NOUT-1:0]    outs;     // outs[0] commits first
  } cfg_hdr_t;

  typedef struct packed {
    cfg_hdr_t                hdr;
    col_cfg_t  [COLS-1:0]    cols;     // virtual columns 0..COLS-1
  } vcfg_t;

  typedef col_cfg_t [NCFG-1:0] cfg_lines_t;

  function automatic word_t sext_imm(input logic [IMMW-1:0] imm);
    return word_t'(signed'(imm));
  endfunction

endpackage
