// transrec_cgra_top: reconfigurable unit with utilization-aware allocation.
//
// A GPP presents the PC of the next instruction sequence. If the configuration
// cache holds a configuration for it, the unit takes over: the configuration
// is streamed over the NCFG configuration lines into the column configuration
// registers, moved on the way to the current pivot (column offset by the
// line-select multiplexers, row offset by the barrel shifters), the input
// context is read from the GPP register file, the fabric executes the columns
// starting at the pivot column and wrapping around, and the ROB writes the
// results back in program order. The pivot then moves one position, so the
// next execution lands on different FUs and the FU utilization evens out.
//
// Ports:
//   rotate_en            1: move the pivot per execution; 0: keep it at 0/0
//   pc_valid, pc         GPP offers the PC of the next sequence
//   busy, done, next_pc  GPP waits while busy; resumes at next_pc on done
//   rf_raddr/rf_rdata    two combinational GPP register-file read ports
//   rf_we/waddr/wdata    one GPP register-file write port
//   cfg_we/wpc/wcfg      configuration written by the binary translator
//   dc_*                 data cache: one read (answer one cycle later) and
//                        one write port
//   fu_busy, hshift, vshift  FUs doing work this cycle, current pivot
// Clock: one rising edge per column step; synchronous active-low reset.
module transrec_cgra_top
  import cgra_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        rotate_en,
  // GPP control
  input  logic                        pc_valid,
  input  logic [PCW-1:0]              pc,
  output logic                        busy,
  output logic                        done,
  output logic [PCW-1:0]              next_pc,
  // GPP register file
  output logic [1:0][REGW-1:0]        rf_raddr,
  input  word_t [1:0]                 rf_rdata,
  output logic                        rf_we,
  output logic [REGW-1:0]             rf_waddr,
  output word_t                       rf_wdata,
  // binary translator
  input  logic                        cfg_we,
  input  logic [PCW-1:0]              cfg_wpc,
  input  vcfg_t                       cfg_wcfg,
  // data cache
  output logic                        dc_rd_en,
  output word_t                       dc_rd_addr,
  input  word_t                       dc_rd_data,
  output logic                        dc_wr_en,
  output word_t                       dc_wr_addr,
  output word_t                       dc_wr_data,
  // observation
  output logic [COLS-1:0][ROWS-1:0]   fu_busy,
  output logic [COLW-1:0]             hshift,
  output logic [ROWW-1:0]             vshift
);
  localparam int IW = $clog2(CFG_ENTRIES);
  localparam int BW = $clog2(NBEAT > 1 ? NBEAT : 2);

  logic                 lk_hit;
  logic [IW-1:0]        lk_idx, rd_idx;
  cfg_lines_t           lines;
  cfg_hdr_t             hdr;
  logic                 beat_valid;
  logic [BW-1:0]        beat;
  logic                 ctx_clear;
  logic [1:0]           ctx_we;
  logic [1:0][CTXW-1:0] ctx_idx;
  ctx_t                 init_ctx, result;
  logic                 step, first;
  logic [COLW-1:0]      cur, res_col;
  logic                 rob_start, rob_done, rob_busy;
  logic                 advance;
  col_cfg_t [COLS-1:0]  col_cfg;

  cfg_cache u_cache (
    .clk, .rst_n, .inval(1'b0),
    .wr_en(cfg_we), .wr_pc(cfg_wpc), .wr_cfg(cfg_wcfg),
    .lk_pc(pc), .lk_hit, .lk_idx,
    .rd_idx, .beat, .lines, .hdr);

  cgra_ctrl u_ctrl (
    .clk, .rst_n,
    .pc_valid, .busy, .done, .next_pc, .rf_raddr,
    .lk_hit, .lk_idx, .rd_idx, .hdr,
    .beat_valid, .beat,
    .ctx_clear, .ctx_we, .ctx_idx,
    .hshift, .step, .cur, .first, .res_col,
    .rob_start, .rob_done,
    .advance);

  pivot_gen u_pivot (
    .clk, .rst_n, .enable(rotate_en), .advance, .hshift, .vshift);

  reconfig_logic u_recfg (
    .clk, .rst_n, .lines, .beat_valid, .beat, .hshift, .vshift, .cfg(col_cfg));

  input_ctx #(.NWR(2)) u_ictx (
    .clk, .rst_n, .clear(ctx_clear), .we(ctx_we), .idx(ctx_idx), .data(rf_rdata),
    .ctx(init_ctx));

  cgra_fabric u_fabric (
    .clk, .rst_n, .cfg(col_cfg), .step, .cur, .first, .init_ctx,
    .res_col, .result, .fu_busy,
    .dc_rd_en, .dc_rd_addr, .dc_rd_data,
    .dc_wr_en, .dc_wr_addr, .dc_wr_data);

  rob u_rob (
    .clk, .rst_n, .start(rob_start), .ctx(result), .outs(hdr.outs),
    .busy(rob_busy), .done(rob_done),
    .rf_we, .rf_waddr, .rf_wdata);
endmodule
