// tb_rob: random output-slot lists; the register writes must come one per
// cycle in slot order, skip invalid slots and x0, carry the context line's
// value captured at start, and `done` must follow NOUT cycles after start.
module tb_rob;
  import cgra_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0;
  ctx_t ctx;
  out_slot_t [NOUT-1:0] outs;
  logic busy, done, we;
  logic [REGW-1:0] wa;
  word_t wd;

  rob dut (.clk, .rst_n, .start, .ctx, .outs, .busy, .done, .rf_we(we), .rf_waddr(wa), .rf_wdata(wd));
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ctx = '0; outs = '0;
    @(posedge clk); #1 rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      ctx_t c0;
      out_slot_t [NOUT-1:0] o0;
      int cyc;
      for (int l = 0; l < NCTX; l++) ctx[l] = $urandom;
      for (int s = 0; s < NOUT; s++) begin
        outs[s].v = 1'($urandom); outs[s].rd = REGW'($urandom_range(0, NREG - 1)); outs[s].line = CTXW'($urandom);
      end
      c0 = ctx; o0 = outs;
      start = 1; @(posedge clk); #1 start = 0;
      ctx = '0; outs = '0;   // later changes must not matter
      cyc = 0;
      for (int s = 0; s < NOUT; s++) begin
        logic ew;
        ew = o0[s].v && o0[s].rd != 0;
        checks++;
        if (we !== ew || (ew && (wa !== o0[s].rd || wd !== c0[o0[s].line]))) begin
          failures++; $display("FAIL n=%0d slot=%0d we=%0d", n, s, we);
        end
        checks++; if (done) begin failures++; $display("FAIL early done"); end
        @(posedge clk); #1;
        cyc++;
      end
      checks++;
      if (!done || we || cyc != NOUT) begin failures++; $display("FAIL done n=%0d", n); end
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
