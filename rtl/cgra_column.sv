// cgra_column: one column of the reconfigurable fabric.
//
// Combinational. The NCTX incoming context lines come either from the previous
// column's context level or, in the first column of an execution, from the
// input context: this is the per-line 2:1 multiplexer that lets a
// configuration start at any column and wrap around (`first` selects it).
// Before each of the ROWS FUs an input crossbar picks the context lines for
// operands A and B (B may be an immediate). After the FUs, an output crossbar
// decides for every context line whether it carries on its incoming value, the
// result of an FU of this column (per-row line mask) or a load result that
// returns in this column (`ld_data`, mask in the memory field). If two sources
// claim one line, a load wins over FUs and the lower row wins among FUs.
// The column also forms the load and store requests of its memory field.
// The crossbars and the 2:1 multiplexer follow the paper; the encodings and
// priorities are this design's choice.
module cgra_column
  import cgra_pkg::*;
(
  input  col_cfg_t        cfg,
  input  logic            first,     // this column starts the execution
  input  ctx_t            prev_ctx,  // context level of the previous column
  input  ctx_t            init_ctx,  // input context
  input  word_t           ld_data,   // load result arriving in this column
  output ctx_t            ctx_out,
  output logic [ROWS-1:0] fu_busy,
  output logic            ld_req,
  output word_t           ld_addr,
  output logic            st_req,
  output word_t           st_addr,
  output word_t           st_data
);
  ctx_t                  ctx_in;
  word_t [ROWS-1:0]      fu_y;

  // wrap-around / start multiplexer, one per context line
  assign ctx_in = first ? init_ctx : prev_ctx;

  for (genvar r = 0; r < ROWS; r++) begin : g_fu
    word_t opa, opb;
    assign opa = ctx_in[cfg.imux[r].sel_a];
    assign opb = cfg.imux[r].use_imm ? sext_imm(cfg.imux[r].imm) : ctx_in[cfg.imux[r].sel_b];
    fu_alu u_fu (.op(cfg.alu[r]), .a(opa), .b(opb), .y(fu_y[r]), .busy(fu_busy[r]));
  end

  // output crossbar
  always_comb begin
    for (int l = 0; l < NCTX; l++) begin
      ctx_out[l] = ctx_in[l];
      for (int r = ROWS - 1; r >= 0; r--)
        if (cfg.omux[r][l] && fu_busy[r]) ctx_out[l] = fu_y[r];
      if (cfg.mem.ld_wmask[l]) ctx_out[l] = ld_data;
    end
  end

  assign ld_req  = cfg.mem.ld_en;
  assign ld_addr = ctx_in[cfg.mem.ld_base] + sext_imm(cfg.mem.ld_off);
  assign st_req  = cfg.mem.st_en;
  assign st_addr = ctx_in[cfg.mem.st_base] + sext_imm(cfg.mem.st_off);
  assign st_data = ctx_in[cfg.mem.st_data];
endmodule
