// tb_pivot_gen: the pivot must sweep all ROWS*COLS positions row by row, one
// per advance, visit each once per sweep and return to 0/0; it must hold
// without advance and stay at 0/0 when disabled.
module tb_pivot_gen;
  import cgra_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 1, adv = 0;
  logic [COLW-1:0] hs;
  logic [ROWW-1:0] vs;
  int seen [ROWS][COLS];

  pivot_gen dut (.clk, .rst_n, .enable(en), .advance(adv), .hshift(hs), .vshift(vs));
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(posedge clk); #1 rst_n = 1;
    foreach (seen[r, c]) seen[r][c] = 0;
    for (int s = 0; s < 2 * ROWS * COLS; s++) begin
      checks++;
      if (int'(hs) != s % COLS || int'(vs) != (s / COLS) % ROWS) begin
        failures++; $display("FAIL s=%0d hs=%0d vs=%0d", s, hs, vs);
      end
      seen[vs][hs]++;
      // idle cycles in between do not move it
      adv = 0; @(posedge clk); #1;
      adv = 1; @(posedge clk); #1;
    end
    foreach (seen[r, c]) begin checks++; if (seen[r][c] != 2) failures++; end
    adv = 1; @(posedge clk); @(posedge clk); #1;
    en = 0; @(posedge clk); #1;
    checks++; if (hs != 0 || vs != 0) failures++;
    repeat (5) @(posedge clk); #1;
    checks++; if (hs != 0 || vs != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
