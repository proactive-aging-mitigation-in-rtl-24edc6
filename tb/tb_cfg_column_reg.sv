// tb_cfg_column_reg: random configuration lines, line selects and vertical
// shifts; the register must hold the selected word with its per-row fields
// rotated, and keep its value while `we` is low.
module tb_cfg_column_reg;
  import cgra_pkg::*;
  import cgra_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, we = 0;
  cfg_lines_t lines;
  logic [$clog2(NCFG)-1:0] sel = '0;
  logic [ROWW-1:0] vs = '0;
  col_cfg_t cfg, exp;

  cfg_column_reg dut (.clk, .rst_n, .lines, .line_sel(sel), .vshift(vs), .we, .cfg);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < NCFG; m++) lines[m] = '0;
    @(posedge clk); #1 rst_n = 1;
    checks++; if (cfg !== '0) begin failures++; $display("FAIL reset"); end
    exp = '0;
    for (int n = 0; n < 300; n++) begin
      for (int m = 0; m < NCFG; m++) begin
        lines[m] = rand_col();
        lines[m].mem.ld_en = 1'($urandom); lines[m].mem.ld_wmask = NCTX'($urandom);
      end
      sel = $urandom; vs = ROWW'($urandom_range(0, ROWS - 1)); we = 1'($urandom);
      if (we) exp = ref_vmove(lines[sel], int'(vs));
      @(posedge clk); #1;
      checks++;
      if (cfg !== exp) begin failures++; $display("FAIL n=%0d sel=%0d vs=%0d we=%0d", n, sel, vs, we); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
