// reconfig_logic: distributes a configuration from the NCFG configuration
// lines to the COLS column configuration registers.
//
// A virtual configuration is streamed in NBEAT = COLS/NCFG beats; in beat k,
// line m carries virtual column k*NCFG + m. With the pivot at column offset
// `hshift`, physical column p must receive virtual column
// j = (p - hshift) mod COLS: its multiplexer selects line j mod NCFG and the
// control part raises its write enable in beat j / NCFG. With hshift = 0 this
// reduces to the unmodified scheme (column i on line i mod n, columns kn..kn+n-1
// written in beat k). `vshift` is passed to every column's row shifters.
// Inputs are sampled on the rising edge; `cfg` of a column changes one cycle
// after its beat. `clear` resets every column to all-idle.
module reconfig_logic
  import cgra_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  cfg_lines_t              lines,
  input  logic                    beat_valid,
  input  logic [$clog2(NBEAT > 1 ? NBEAT : 2)-1:0] beat,
  input  logic [COLW-1:0]         hshift,
  input  logic [ROWW-1:0]         vshift,
  output col_cfg_t [COLS-1:0]     cfg
);
  localparam int BW = $clog2(NBEAT > 1 ? NBEAT : 2);
  localparam int LW = $clog2(NCFG);

  for (genvar p = 0; p < COLS; p++) begin : g_col
    logic [COLW-1:0] vcol;
    logic [LW-1:0]   sel;
    logic            we;
    assign vcol = COLW'(p) - hshift;          // wraps modulo COLS (COLS is a power of two)
    assign sel  = vcol[LW-1:0];               // vcol mod NCFG
    assign we   = beat_valid && (BW'(vcol >> LW) == beat);
    cfg_column_reg u_reg (
      .clk, .rst_n, .lines, .line_sel(sel), .vshift, .we, .cfg(cfg[p]));
  end

  initial begin
    assert ((COLS & (COLS - 1)) == 0 && (NCFG & (NCFG - 1)) == 0 && COLS % NCFG == 0)
      else $error("COLS and NCFG must be powers of two with NCFG dividing COLS");
  end
endmodule
