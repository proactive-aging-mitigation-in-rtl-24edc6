// tb_cgra_ctrl: drives the controller with random headers and pivots and
// checks its whole schedule cycle by cycle: configuration beats, register
// reads and input-context writes, the column sequence from the pivot with
// wrap-around, the ROB start, done/advance, and the total busy time of
// NLOAD + ncols + NOUT + 3 cycles (NLOAD = max(COLS/NCFG, NCTX/2)).
module tb_cgra_ctrl;
  import cgra_pkg::*;
  import cgra_ref_pkg::*;
  localparam int IW = $clog2(CFG_ENTRIES);
  localparam int NLOAD = (NBEAT > (NCTX + 1) / 2) ? NBEAT : (NCTX + 1) / 2;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, pcv = 0, hit = 0;
  logic [IW-1:0] lidx = '0, ridx;
  cfg_hdr_t hdr;
  logic busy, done, bv, clr, step, first, rst_rob, robdone = 0, adv;
  logic [PCW-1:0] npc;
  logic [1:0][REGW-1:0] raddr;
  logic [$clog2(NBEAT > 1 ? NBEAT : 2)-1:0] beat;
  logic [1:0] cwe;
  logic [1:0][CTXW-1:0] cidx;
  logic [COLW-1:0] hs = '0, cur, resc;

  cgra_ctrl dut (.clk, .rst_n, .pc_valid(pcv), .busy, .done, .next_pc(npc), .rf_raddr(raddr),
    .lk_hit(hit), .lk_idx(lidx), .rd_idx(ridx), .hdr, .beat_valid(bv), .beat,
    .ctx_clear(clr), .ctx_we(cwe), .ctx_idx(cidx), .hshift(hs), .step, .cur, .first,
    .res_col(resc), .rob_start(rst_rob), .rob_done(robdone), .advance(adv));
  always #5 clk = ~clk;

  // ROB stand-in: done in the (NOUT+1)-th cycle after start, like rob
  int robcnt = -1;
  always_ff @(posedge clk) begin
    robdone <= 1'b0;
    if (rst_rob) robcnt <= NOUT - 1;
    else if (robcnt > 0) robcnt <= robcnt - 1;
    else if (robcnt == 0) begin robdone <= 1'b1; robcnt <= -1; end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    vcfg_t v;
    @(posedge clk); #1 rst_n = 1;
    // a miss does nothing
    pcv = 1; hit = 0; repeat (3) @(posedge clk); #1;
    chk(!busy, "busy on miss");
    for (int n = 0; n < 100; n++) begin
      int nc, h, cyc;
      nc = $urandom_range(1, COLS);
      h  = $urandom_range(0, COLS - 1);
      v  = rand_vcfg(nc, 1'b0, $urandom);
      hdr = v.hdr; hs = COLW'(h); lidx = IW'($urandom);
      pcv = 1; hit = 1;
      #1; chk(clr && !busy, "clear on hit");
      @(posedge clk); #1;
      pcv = 0; hit = 0;
      chk(ridx == lidx, "entry latched");
      cyc = 0;
      for (int c = 0; c < NLOAD; c++) begin
        chk(busy && !step, "load phase");
        chk(bv == (c < NBEAT) && (c >= NBEAT || int'(beat) == c), "beat");
        for (int i = 0; i < 2; i++) begin
          int l; l = 2 * c + i;
          if (l < NCTX) begin
            chk(int'(cidx[i]) == l && raddr[i] == v.hdr.in_map[l].r && cwe[i] == v.hdr.in_map[l].v, "ctx read");
          end else chk(!cwe[i], "no extra ctx write");
        end
        @(posedge clk); #1; cyc++;
      end
      for (int k = 0; k < nc; k++) begin
        chk(step && int'(cur) == (h + k) % COLS && first == (k == 0), "column step");
        @(posedge clk); #1; cyc++;
      end
      chk(!step && rst_rob && int'(resc) == (h + nc - 1) % COLS, "rob start");
      while (!done && cyc < 1000) begin
        chk(busy && !adv, "waiting");
        @(posedge clk); #1; cyc++;
      end
      chk(done && adv && npc == v.hdr.next_pc, "done");
      cyc++;
      chk(cyc == NLOAD + nc + NOUT + 3, $sformatf("busy time %0d", cyc));
      @(posedge clk); #1;
      chk(!busy, "back to idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
