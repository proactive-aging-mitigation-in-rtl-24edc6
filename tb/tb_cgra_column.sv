// tb_cgra_column: random column settings and contexts against the reference
// column model, with and without the first-column (input context) select;
// also checks the FU busy flags and the load/store request fields.
module tb_cgra_column;
  import cgra_pkg::*;
  import cgra_ref_pkg::*;
  int checks = 0, failures = 0;
  col_cfg_t cfg;
  logic first;
  ctx_t prev, init, out, exp;
  word_t ldd, lda, sta, std;
  logic [ROWS-1:0] busy;
  logic ldr, str;
  int nb;

  cgra_column dut (.cfg, .first, .prev_ctx(prev), .init_ctx(init), .ld_data(ldd),
    .ctx_out(out), .fu_busy(busy), .ld_req(ldr), .ld_addr(lda), .st_req(str),
    .st_addr(sta), .st_data(std));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      ctx_t x;
      cfg = rand_col();
      cfg.mem.ld_en = 1'($urandom); cfg.mem.ld_base = CTXW'($urandom); cfg.mem.ld_off = IMMW'($urandom);
      cfg.mem.st_en = 1'($urandom); cfg.mem.st_base = CTXW'($urandom); cfg.mem.st_data = CTXW'($urandom);
      cfg.mem.st_off = IMMW'($urandom);
      if ($urandom_range(0, 1)) begin
        cfg.mem.ld_wmask = NCTX'(1) << $urandom_range(0, NCTX - 1);
        for (int r = 0; r < ROWS; r++) cfg.omux[r] &= ~cfg.mem.ld_wmask;
      end
      for (int l = 0; l < NCTX; l++) begin prev[l] = $urandom; init[l] = $urandom; end
      ldd = $urandom; first = 1'($urandom);
      x = first ? init : prev;
      exp = ref_col(cfg, x, ldd, nb);
      #1;
      checks++;
      if (out !== exp) begin failures++; $display("FAIL ctx n=%0d first=%0d", n, first); end
      checks++;
      if ($countones(busy) != nb) begin failures++; $display("FAIL busy n=%0d", n); end
      checks++;
      if (ldr !== cfg.mem.ld_en || lda !== x[cfg.mem.ld_base] + sx(cfg.mem.ld_off) ||
          str !== cfg.mem.st_en || sta !== x[cfg.mem.st_base] + sx(cfg.mem.st_off) ||
          std !== x[cfg.mem.st_data]) begin
        failures++; $display("FAIL mem n=%0d", n);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
