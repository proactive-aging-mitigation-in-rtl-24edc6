// tb_transrec_cgra_top: end-to-end test of the reconfigurable unit at its
// default size (16 columns x 2 rows).
//
// A register-file model, a data-memory model and a stand-in for the binary
// translator surround the unit. Random configurations are written into the
// configuration cache at several PCs; then a workload of executions is run,
// first with the pivot fixed (unmodified allocation) and then with the moving
// pivot. After every execution the GPP registers, the data memory, the resume
// PC and the busy time are compared with the reference model, which executes
// the configuration unmoved. The test counts how often each mechanism occurs
// (cache miss, load, store, vertical move, wrap-around past the last column,
// full pivot sweep) and fails if one never does. It also records, per FU, in
// how many executions it did work, and requires the moving pivot to lower the
// highest FU utilization. A hand-written configuration with hand-computed
// results is run unmoved and at the last pivot, where it wraps over both the
// last column and the last row; the FUs it must occupy there are checked.
module tb_transrec_cgra_top;
  import cgra_pkg::*;
  import cgra_ref_pkg::*;
  localparam int NLOAD = (NBEAT > (NCTX + 1) / 2) ? NBEAT : (NCTX + 1) / 2;
  localparam int NPC   = 6;
  localparam int NEXEC = 4 * ROWS * COLS;   // per phase: four full pivot sweeps

  int checks = 0, failures = 0;
  int n_miss = 0, n_load = 0, n_store = 0, n_vmove = 0, n_wrap = 0, n_sweep = 0, n_exec = 0;

  logic clk = 0, rst_n = 0, rot = 0, pcv = 0;
  logic [PCW-1:0] pc = '0, npc;
  logic busy, done;
  logic [1:0][REGW-1:0] raddr;
  word_t [1:0] rdata;
  logic rwe;
  logic [REGW-1:0] rwa;
  word_t rwd;
  logic cwe = 0;
  logic [PCW-1:0] cwpc = '0;
  vcfg_t cwcfg = '0;
  logic dre, dwe;
  word_t dra, drd, dwa, dwd;
  logic [COLS-1:0][ROWS-1:0] fub;
  logic [COLW-1:0] hs;
  logic [ROWW-1:0] vs;

  transrec_cgra_top dut (
    .clk, .rst_n, .rotate_en(rot), .pc_valid(pcv), .pc, .busy, .done, .next_pc(npc),
    .rf_raddr(raddr), .rf_rdata(rdata), .rf_we(rwe), .rf_waddr(rwa), .rf_wdata(rwd),
    .cfg_we(cwe), .cfg_wpc(cwpc), .cfg_wcfg(cwcfg),
    .dc_rd_en(dre), .dc_rd_addr(dra), .dc_rd_data(drd),
    .dc_wr_en(dwe), .dc_wr_addr(dwa), .dc_wr_data(dwd),
    .fu_busy(fub), .hshift(hs), .vshift(vs));
  always #5 clk = ~clk;

  // GPP register file and data cache models
  word_t regs [NREG];
  word_t mem  [MEMW];
  assign rdata[0] = regs[raddr[0]];
  assign rdata[1] = regs[raddr[1]];
  always_ff @(posedge clk) begin
    if (rwe && rwa != 0) regs[rwa] <= rwd;
    if (dre) drd <= mem[dra[9:2]];
    if (dwe) mem[dwa[9:2]] <= dwd;
  end

  // per-FU utilization: executions in which the FU did work
  int used [2][COLS][ROWS];
  bit used_now [COLS][ROWS];
  int phase = 0;
  always @(posedge clk)
    for (int p = 0; p < COLS; p++) for (int r = 0; r < ROWS; r++) if (fub[p][r]) used_now[p][r] = 1;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  vcfg_t cfgs [NPC];
  logic [PCW-1:0] pcs [NPC];
  word_t rregs [NREG];

  task automatic run_one(input int i);
    ctx_t init, fin;
    int cyc, nc, h, v;
    nc = int'(cfgs[i].hdr.ncols);
    h = int'(hs); v = int'(vs);
    // reference
    for (int l = 0; l < NCTX; l++) init[l] = cfgs[i].hdr.in_map[l].v ? rregs[cfgs[i].hdr.in_map[l].r] : 0;
    fin = ref_exec(cfgs[i], init);
    for (int s = 0; s < NOUT; s++)
      if (cfgs[i].hdr.outs[s].v && cfgs[i].hdr.outs[s].rd != 0)
        rregs[cfgs[i].hdr.outs[s].rd] = fin[cfgs[i].hdr.outs[s].line];
    for (int j = 0; j < nc; j++) begin
      if (cfgs[i].cols[j].mem.ld_en) n_load++;
      if (cfgs[i].cols[j].mem.st_en) n_store++;
    end
    if (v != 0) n_vmove++;
    if (h + nc > COLS) n_wrap++;
    foreach (used_now[p, r]) used_now[p][r] = 0;
    // offer the PC
    pc = pcs[i]; pcv = 1;
    @(posedge clk); #1 pcv = 0;
    cyc = 0;
    while (!done && cyc < 1000) begin @(posedge clk); #1; cyc++; end
    cyc++;
    chk(cyc == NLOAD + nc + NOUT + 3, $sformatf("busy time %0d, expected %0d", cyc, NLOAD + nc + NOUT + 3));
    chk(npc == cfgs[i].hdr.next_pc, "resume pc");
    @(posedge clk); #1;
    chk(!busy, "idle after done");
    for (int r = 0; r < NREG; r++) begin
      checks++;
      if (regs[r] !== rregs[r]) begin failures++; $display("FAIL x%0d=%h exp %h (pc %0d, h=%0d v=%0d)", r, regs[r], rregs[r], i, h, v); end
    end
    for (int a = 0; a < MEMW; a++) begin
      checks++;
      if (mem[a] !== ref_mem[a]) begin failures++; $display("FAIL mem[%0d]", a); break; end
    end
    foreach (used_now[p, r]) if (used_now[p][r]) used[phase][p][r]++;
    n_exec++;
    if (rot && hs == 0 && vs == 0) n_sweep++;
  endtask

  // Hand-written three-column configuration at a PC whose cache index no
  // other configuration uses; values worked out by hand:
  //   col 0: row 0 l2 = l0 + l1 (130)     row 1 l3 = l0 - l1 (70)
  //   col 1: row 0 l4 = l2 + 5  (135)     row 1 l5 = l3 ^ l2 (196)
  //   col 2: row 0 l6 = l4 | l5 (199)
  // with l0 = x1 = 100, l1 = x2 = 30; write-back x10 <- l6, x11 <- l3,
  // x10 <- l4, so x10 ends as 135 (the later slot wins) and x11 as 70.
  int n_directed = 0;
  task automatic run_directed();
    vcfg_t d;
    int cyc, h, v, nw;
    bit exp_busy [COLS][ROWS];
    bit saw_busy [COLS][ROWS];
    d = '0;
    d.hdr.next_pc = 32'h0000_3100;
    d.hdr.ncols = 3;
    d.hdr.in_map[0] = '{v: 1'b1, r: 5'd1};
    d.hdr.in_map[1] = '{v: 1'b1, r: 5'd2};
    d.cols[0].alu[0] = ALU_ADD; d.cols[0].imux[0].sel_a = 0; d.cols[0].imux[0].sel_b = 1; d.cols[0].omux[0] = 8'b0000_0100;
    d.cols[0].alu[1] = ALU_SUB; d.cols[0].imux[1].sel_a = 0; d.cols[0].imux[1].sel_b = 1; d.cols[0].omux[1] = 8'b0000_1000;
    d.cols[1].alu[0] = ALU_ADD; d.cols[1].imux[0].sel_a = 2; d.cols[1].imux[0].use_imm = 1; d.cols[1].imux[0].imm = 5;
    d.cols[1].omux[0] = 8'b0001_0000;
    d.cols[1].alu[1] = ALU_XOR; d.cols[1].imux[1].sel_a = 3; d.cols[1].imux[1].sel_b = 2; d.cols[1].omux[1] = 8'b0010_0000;
    d.cols[2].alu[0] = ALU_OR;  d.cols[2].imux[0].sel_a = 4; d.cols[2].imux[0].sel_b = 5; d.cols[2].omux[0] = 8'b0100_0000;
    d.hdr.outs[0] = '{v: 1'b1, rd: 5'd10, line: 3'd6};
    d.hdr.outs[1] = '{v: 1'b1, rd: 5'd11, line: 3'd3};
    d.hdr.outs[2] = '{v: 1'b1, rd: 5'd10, line: 3'd4};
    cwe = 1; cwpc = 32'h0000_3004; cwcfg = d;
    @(posedge clk); #1 cwe = 0;
    regs[1] = 100; regs[2] = 30; rregs[1] = 100; rregs[2] = 30;
    h = int'(hs); v = int'(vs);
    // FUs expected to work: virtual (row, col) moved by (v, h)
    foreach (exp_busy[p, r]) begin exp_busy[p][r] = 0; saw_busy[p][r] = 0; end
    exp_busy[(0 + h) % COLS][(0 + v) % ROWS] = 1; exp_busy[(0 + h) % COLS][(1 + v) % ROWS] = 1;
    exp_busy[(1 + h) % COLS][(0 + v) % ROWS] = 1; exp_busy[(1 + h) % COLS][(1 + v) % ROWS] = 1;
    exp_busy[(2 + h) % COLS][(0 + v) % ROWS] = 1;
    pc = 32'h0000_3004; pcv = 1;
    @(posedge clk); #1 pcv = 0;
    cyc = 0; nw = 0;
    while (!done && cyc < 1000) begin
      foreach (saw_busy[p, r]) if (fub[p][r]) saw_busy[p][r] = 1;
      if (rwe) begin
        nw++;
        chk((nw == 1 && rwa == 10 && rwd == 199) || (nw == 2 && rwa == 11 && rwd == 70) ||
            (nw == 3 && rwa == 10 && rwd == 135), $sformatf("directed write %0d: x%0d=%0d", nw, rwa, rwd));
      end
      @(posedge clk); #1; cyc++;
    end
    cyc++;
    chk(cyc == NLOAD + 3 + NOUT + 3, "directed busy time");
    chk(nw == 3, "directed: three writes in order");
    chk(npc == 32'h0000_3100, "directed resume pc");
    @(posedge clk); #1;
    chk(regs[10] == 135 && regs[11] == 70, $sformatf("directed x10=%0d x11=%0d", regs[10], regs[11]));
    foreach (exp_busy[p, r]) chk(saw_busy[p][r] == exp_busy[p][r], $sformatf("directed FU c%0d r%0d at pivot %0d/%0d", p, r, v, h));
    rregs[10] = 135; rregs[11] = 70;
    n_directed++;
  endtask

  initial begin
    int mx [2];
    for (int r = 0; r < NREG; r++) begin regs[r] = (r == 0) ? 0 : $urandom; rregs[r] = regs[r]; end
    for (int a = 0; a < MEMW; a++) begin mem[a] = $urandom; ref_mem[a] = mem[a]; end
    drd = 0;
    foreach (used[ph, p, r]) used[ph][p][r] = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    // the translator fills the configuration cache; sequences are short, as
    // a translated basic block usually is, so they occupy the left columns
    for (int i = 0; i < NPC; i++) begin
      pcs[i]  = 32'h0000_1000 + 32'(i * 4 * 3);
      cfgs[i] = rand_vcfg($urandom_range(LD_COLS + 1, COLS / 2 + 2), 1'b1, pcs[i] + 32'h40);
      cwe = 1; cwpc = pcs[i]; cwcfg = cfgs[i];
      @(posedge clk); #1;
    end
    cwe = 0;
    // a PC without a configuration is not taken over
    pc = 32'h0000_2000; pcv = 1;
    repeat (3) @(posedge clk); #1;
    chk(!busy, "miss must not start the unit"); if (!busy) n_miss++;
    pcv = 0;
    for (phase = 0; phase < 2; phase++) begin
      rot = (phase == 1);
      @(posedge clk); #1;
      for (int n = 0; n < NEXEC; n++) begin
        // directed case unmoved, and at the last pivot (row ROWS-1, column
        // COLS-1), where it wraps over both edges
        if ((!rot && n == 0) || (rot && hs == COLW'(COLS - 1) && vs == ROWW'(ROWS - 1) && n_directed == 1))
          run_directed();
        run_one(n % NPC);
      end
    end
    chk(n_directed == 2, "directed case ran unmoved and at the last pivot");
    // utilization: the moving pivot must spread the work
    for (int ph = 0; ph < 2; ph++) begin
      mx[ph] = 0;
      foreach (used[ph, p, r]) if (used[ph][p][r] > mx[ph]) mx[ph] = used[ph][p][r];
      $display("phase %0d (%s): highest FU utilization %0d of %0d executions", ph,
               ph ? "moving pivot" : "fixed pivot", mx[ph], NEXEC);
    end
    chk(mx[1] < mx[0], "moving pivot lowers the highest utilization");
    $display("mechanisms: exec=%0d miss=%0d load=%0d store=%0d vertical=%0d wrap=%0d sweep=%0d",
             n_exec, n_miss, n_load, n_store, n_vmove, n_wrap, n_sweep);
    chk(n_miss > 0 && n_load > 0 && n_store > 0 && n_vmove > 0 && n_wrap > 0 && n_sweep > 0,
        "every mechanism occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
