// cgra_fabric: the datapath of the reconfigurable unit.
//
// COLS columns (cgra_column) form a ring. Every column owns a context-level
// register that holds the NCTX lines it produced; column p reads the level of
// column p-1, and column 0 reads the level of column COLS-1, which is the
// wrap-around path from the last column back to the first. An execution is a
// wavefront: in each step (one clock) the controller names the active column
// `cur`; that column computes and its level register captures the result.
// In the first step (`first`) the column takes the input context instead of
// its predecessor's level, so a configuration may start at any column.
// Load and store requests of the active column go to the shared memory unit,
// and a returning load is offered to whichever column is active LD_COLS-1
// steps later.
//
// The paper's fabric is combinational with two ALU columns per processor
// cycle; here one column is evaluated per clock (the clock corresponds to half
// a processor cycle) and the level registers break the ring, which would
// otherwise be a combinational loop. `fu_busy` shows which FUs do work in the
// current step, for utilization monitoring.
module cgra_fabric
  import cgra_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  input  col_cfg_t [COLS-1:0]         cfg,
  input  logic                        step,      // evaluate column `cur`
  input  logic [COLW-1:0]             cur,
  input  logic                        first,
  input  ctx_t                        init_ctx,
  input  logic [COLW-1:0]             res_col,   // level to present on `result`
  output ctx_t                        result,
  output logic [COLS-1:0][ROWS-1:0]   fu_busy,
  // data cache
  output logic                        dc_rd_en,
  output word_t                       dc_rd_addr,
  input  word_t                       dc_rd_data,
  output logic                        dc_wr_en,
  output word_t                       dc_wr_addr,
  output word_t                       dc_wr_data
);
  ctx_t  [COLS-1:0]            level;
  ctx_t  [COLS-1:0]            col_out;
  logic  [COLS-1:0][ROWS-1:0]  col_busy;
  logic  [COLS-1:0]            c_ldreq, c_streq;
  word_t [COLS-1:0]            c_ldaddr, c_staddr, c_stdata;
  word_t                       ld_data;
  logic                        ld_valid;

  for (genvar p = 0; p < COLS; p++) begin : g_col
    logic act;
    assign act = step && (cur == COLW'(p));
    cgra_column u_col (
      .cfg     (cfg[p]),
      .first   (first),
      .prev_ctx(level[(p + COLS - 1) % COLS]),
      .init_ctx(init_ctx),
      .ld_data (ld_data),
      .ctx_out (col_out[p]),
      .fu_busy (col_busy[p]),
      .ld_req  (c_ldreq[p]),
      .ld_addr (c_ldaddr[p]),
      .st_req  (c_streq[p]),
      .st_addr (c_staddr[p]),
      .st_data (c_stdata[p]));
    assign fu_busy[p] = act ? col_busy[p] : '0;

    always_ff @(posedge clk) begin
      if (!rst_n)   level[p] <= '0;
      else if (act) level[p] <= col_out[p];
    end
  end

  // the active column's memory request
  logic  a_ldreq, a_streq;
  word_t a_ldaddr, a_staddr, a_stdata;
  assign a_ldreq  = step && c_ldreq[cur];
  assign a_streq  = step && c_streq[cur];
  assign a_ldaddr = c_ldaddr[cur];
  assign a_staddr = c_staddr[cur];
  assign a_stdata = c_stdata[cur];

  mem_unit u_mem (
    .clk, .rst_n,
    .ld_req(a_ldreq), .ld_addr(a_ldaddr),
    .st_req(a_streq), .st_addr(a_staddr), .st_data(a_stdata),
    .ld_data, .ld_valid,
    .dc_rd_en, .dc_rd_addr, .dc_rd_data,
    .dc_wr_en, .dc_wr_addr, .dc_wr_data);

  assign result = level[res_col];

  // A column may only route a load result onto its lines in the step in
  // which a load issued LD_COLS-1 steps earlier returns.
  always_ff @(posedge clk)
    if (rst_n && step)
      assert (cfg[cur].mem.ld_wmask == '0 || ld_valid)
        else $error("column %0d routes a load result but no load returns", cur);
endmodule
