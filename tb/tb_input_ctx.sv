// tb_input_ctx: random writes through both ports, clears and resets against a
// model of the eight input-context words.
module tb_input_ctx;
  import cgra_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clr = 0;
  logic [1:0] we = 0;
  logic [1:0][CTXW-1:0] idx = '0;
  word_t [1:0] data = '0;
  ctx_t ctx, m;

  input_ctx #(.NWR(2)) dut (.clk, .rst_n, .clear(clr), .we, .idx, .data, .ctx);
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
    m = '0;
    checks++; if (ctx !== m) failures++;
    for (int n = 0; n < 1000; n++) begin
      clr = ($urandom_range(0, 15) == 0);
      we = 2'($urandom);
      idx[0] = CTXW'($urandom); idx[1] = CTXW'($urandom);
      if (idx[1] == idx[0]) idx[1] = idx[0] + 1'b1;
      data[0] = $urandom; data[1] = $urandom;
      if (clr) m = '0;
      else for (int i = 0; i < 2; i++) if (we[i]) m[idx[i]] = data[i];
      @(posedge clk); #1;
      checks++;
      if (ctx !== m) begin failures++; $display("FAIL n=%0d", n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
