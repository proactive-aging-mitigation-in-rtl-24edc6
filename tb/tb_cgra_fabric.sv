// tb_cgra_fabric: loads random virtual configurations, moved to random
// pivots, straight into the column configuration inputs, runs them column by
// column from the pivot column with wrap-around, and compares the final
// context and the data memory with the unmoved reference execution. Counts
// runs that wrap from the last column to the first and runs with loads.
module tb_cgra_fabric;
  import cgra_pkg::*;
  import cgra_ref_pkg::*;
  int checks = 0, failures = 0, wraps = 0, loads = 0, vmoves = 0;
  logic clk = 0, rst_n = 0, step = 0, first = 0;
  col_cfg_t [COLS-1:0] cfg;
  logic [COLW-1:0] cur = '0, res = '0;
  ctx_t init, result;
  logic [COLS-1:0][ROWS-1:0] busy;
  logic dre, dwe;
  word_t dra, drd, dwa, dwd;
  word_t mem [256];

  cgra_fabric dut (.clk, .rst_n, .cfg, .step, .cur, .first, .init_ctx(init), .res_col(res),
    .result, .fu_busy(busy), .dc_rd_en(dre), .dc_rd_addr(dra), .dc_rd_data(drd),
    .dc_wr_en(dwe), .dc_wr_addr(dwa), .dc_wr_data(dwd));
  always #5 clk = ~clk;

  always_ff @(posedge clk) begin
    if (dre) drd <= mem[dra[9:2]];
    if (dwe) mem[dwa[9:2]] <= dwd;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vcfg_t v;
    ctx_t exp;
    int hs, vs, nc, nbusy;
    drd = 0;
    for (int i = 0; i < 256; i++) begin mem[i] = $urandom; ref_mem[i] = mem[i]; end
    cfg = '0; init = '0;
    @(posedge clk); #1 rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      nc = $urandom_range(1, COLS);
      hs = $urandom_range(0, COLS - 1); vs = $urandom_range(0, ROWS - 1);
      v = rand_vcfg(nc, 1'b1, '0);
      for (int p = 0; p < COLS; p++) cfg[p] = ref_vmove(v.cols[(p - hs + COLS) % COLS], vs);
      for (int l = 0; l < NCTX; l++) init[l] = $urandom;
      exp = ref_exec(v, init);
      if (hs + nc > COLS) wraps++;
      if (vs != 0) vmoves++;
      for (int j = 0; j < nc; j++) if (v.cols[j].mem.ld_en) loads++;
      nbusy = 0;
      for (int k = 0; k < nc; k++) begin
        step = 1; cur = COLW'((hs + k) % COLS); first = (k == 0);
        #1;
        for (int p = 0; p < COLS; p++) nbusy += $countones(busy[p]);
        for (int p = 0; p < COLS; p++) if (p != (hs + k) % COLS && busy[p] != '0) begin
          failures++; $display("FAIL busy outside active column");
        end
        @(posedge clk); #1;
      end
      step = 0; first = 0;
      res = COLW'((hs + nc - 1) % COLS);
      #1;
      checks++;
      if (result !== exp) begin failures++; $display("FAIL ctx n=%0d nc=%0d hs=%0d vs=%0d", n, nc, hs, vs); end
      begin
        int eb; eb = 0;
        for (int j = 0; j < nc; j++) for (int r = 0; r < ROWS; r++) if (v.cols[j].alu[r] != ALU_NOP) eb++;
        checks++; if (nbusy != eb) begin failures++; $display("FAIL busy count %0d vs %0d", nbusy, eb); end
      end
      @(posedge clk); #1;
      for (int i = 0; i < 256; i++) begin
        checks++;
        if (mem[i] !== ref_mem[i]) begin failures++; $display("FAIL mem[%0d] n=%0d", i, n); break; end
      end
    end
    checks++; if (wraps == 0) begin failures++; $display("no wrap-around run"); end
    checks++; if (loads == 0) begin failures++; $display("no load"); end
    checks++; if (vmoves == 0) begin failures++; $display("no vertical move"); end
    $display("runs wrapping=%0d loads=%0d vertical=%0d", wraps, loads, vmoves);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
