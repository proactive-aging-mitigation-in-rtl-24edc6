// tb_reconfig_logic: streams random virtual configurations in COLS/NCFG beats
// at random pivots and checks that physical column p holds virtual column
// (p - hshift) mod COLS with its rows moved down by vshift, that loading takes
// exactly NBEAT cycles, and that columns not yet due are untouched.
module tb_reconfig_logic;
  import cgra_pkg::*;
  import cgra_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, bv = 0;
  cfg_lines_t lines;
  logic [$clog2(NBEAT > 1 ? NBEAT : 2)-1:0] beat = '0;
  logic [COLW-1:0] hs = '0;
  logic [ROWW-1:0] vs = '0;
  col_cfg_t [COLS-1:0] cfg;
  vcfg_t v;

  reconfig_logic dut (.clk, .rst_n, .lines, .beat_valid(bv), .beat, .hshift(hs), .vshift(vs), .cfg);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    lines = '0;
    @(posedge clk); #1 rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      v  = rand_vcfg(COLS, 1'b1, '0);
      hs = COLW'($urandom); vs = ROWW'($urandom_range(0, ROWS - 1));
      if (n == 0) begin hs = 0; vs = 0; end
      if (n == 1) begin hs = COLW'(COLS - 1); vs = ROWW'(ROWS - 1); end
      for (int k = 0; k < NBEAT; k++) begin
        bv = 1; beat = k[$bits(beat)-1:0];
        for (int m = 0; m < NCFG; m++) lines[m] = v.cols[k * NCFG + m];
        @(posedge clk); #1;
        // after beat k, exactly the columns holding virtual columns < (k+1)*NCFG are new
        for (int p = 0; p < COLS; p++) begin
          int j;
          j = (p - int'(hs) + COLS) % COLS;
          if (j < (k + 1) * NCFG) begin
            checks++;
            if (cfg[p] !== ref_vmove(v.cols[j], int'(vs))) begin
              failures++; $display("FAIL n=%0d beat=%0d p=%0d j=%0d hs=%0d vs=%0d", n, k, p, j, hs, vs);
            end
          end
        end
      end
      bv = 0;
      // idle cycles do not disturb the columns
      lines = '0;
      @(posedge clk); #1;
      for (int p = 0; p < COLS; p++) begin
        checks++;
        if (cfg[p] !== ref_vmove(v.cols[(p - int'(hs) + COLS) % COLS], int'(vs))) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
