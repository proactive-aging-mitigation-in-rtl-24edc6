// tb_utilization_workload: FU utilization of the 16x2 unit under a workload
// with the corner bias of a greedy mapper, with the pivot held and moving.
//
// NPC configurations are generated the way a first-free-FU mapper fills the
// array: columns from the left, row 0 before row 1, short sequences more
// common than long ones. They are synthetic stand-ins for translated program
// sequences. NPC = 5 is coprime with the 32 pivot positions, so
// 5 x 32 = 160 executions in round-robin order pair every configuration with
// every pivot exactly once. Each run is also checked against the reference
// model (registers and data memory).
//
// Expected results, computed independently of the unit:
//  - pivot held: FU (r, c) is used by exactly the configurations that use
//    virtual FU (r, c), each executed 32 times;
//  - pivot moving: every FU is used exactly sum_c u_c times, where u_c is the
//    number of non-idle FUs of configuration c, because the offsets over all
//    positions carry each virtual FU to every physical FU once.
// Both utilization maps are printed, in percent of executions.
module tb_utilization_workload;
  import cgra_pkg::*;
  import cgra_ref_pkg::*;
  localparam int NPC   = 5;
  localparam int NPOS  = ROWS * COLS;
  localparam int NEXEC = NPC * NPOS;

  int checks = 0, failures = 0;
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

  word_t regs [NREG];
  word_t mem  [MEMW];
  assign rdata[0] = regs[raddr[0]];
  assign rdata[1] = regs[raddr[1]];
  always_ff @(posedge clk) begin
    if (rwe && rwa != 0) regs[rwa] <= rwd;
    if (dre) drd <= mem[dra[9:2]];
    if (dwe) mem[dwa[9:2]] <= dwd;
  end

  int used [2][ROWS][COLS];
  bit used_now [ROWS][COLS];
  always @(posedge clk)
    for (int p = 0; p < COLS; p++) for (int r = 0; r < ROWS; r++) if (fub[p][r]) used_now[r][p] = 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  vcfg_t cfgs [NPC];
  logic [PCW-1:0] pcs [NPC];
  word_t rregs [NREG];

  // first-free-FU style configuration: columns from the left, row 0 first
  function automatic vcfg_t biased_cfg(input logic [PCW-1:0] next_pc);
    vcfg_t v;
    int nc;
    nc = $urandom_range(0, 3) == 0 ? $urandom_range(9, COLS) : $urandom_range(LD_COLS + 1, 8);
    v = rand_vcfg(nc, 1'b1, next_pc);
    for (int j = 0; j < nc; j++) begin
      if (v.cols[j].alu[0] == ALU_NOP) v.cols[j].alu[0] = ALU_ADD;
      for (int r = 1; r < ROWS; r++)
        if ($urandom_range(0, 99) < 100 - (100 * j) / COLS - 30 * r) begin
          if (v.cols[j].alu[r] == ALU_NOP) v.cols[j].alu[r] = ALU_XOR;
        end else v.cols[j].alu[r] = ALU_NOP;
    end
    return v;
  endfunction

  task automatic run_one(input int i, input int ph);
    ctx_t init, fin;
    int cyc;
    for (int l = 0; l < NCTX; l++) init[l] = cfgs[i].hdr.in_map[l].v ? rregs[cfgs[i].hdr.in_map[l].r] : 0;
    fin = ref_exec(cfgs[i], init);
    for (int s = 0; s < NOUT; s++)
      if (cfgs[i].hdr.outs[s].v && cfgs[i].hdr.outs[s].rd != 0)
        rregs[cfgs[i].hdr.outs[s].rd] = fin[cfgs[i].hdr.outs[s].line];
    foreach (used_now[r, p]) used_now[r][p] = 0;
    pc = pcs[i]; pcv = 1;
    @(posedge clk); #1 pcv = 0;
    cyc = 0;
    while (!done && cyc < 1000) begin @(posedge clk); #1; cyc++; end
    @(posedge clk); #1;
    checks++;
    if (cyc >= 1000) begin failures++; $display("FAIL no done"); end
    for (int r = 0; r < NREG; r++) begin
      checks++;
      if (regs[r] !== rregs[r]) begin failures++; $display("FAIL x%0d", r); end
    end
    for (int a = 0; a < MEMW; a++) if (mem[a] !== ref_mem[a]) begin
      checks++; failures++; $display("FAIL mem[%0d]", a); break;
    end
    foreach (used_now[r, p]) if (used_now[r][p]) used[ph][r][p]++;
  endtask

  task automatic show(input int ph);
    $display("%s", ph ? "moving pivot, utilization % per FU (row x column):" :
                        "pivot held, utilization % per FU (row x column):");
    for (int r = 0; r < ROWS; r++) begin
      string s;
      s = "";
      for (int p = 0; p < COLS; p++) s = {s, $sformatf(" %3d", (100 * used[ph][r][p] + NEXEC / 2) / NEXEC)};
      $display("  row %0d:%s", r, s);
    end
  endtask

  initial begin
    int sum_u, mx0, mx1;
    int exp0 [ROWS][COLS];
    for (int r = 0; r < NREG; r++) begin regs[r] = (r == 0) ? 0 : $urandom; rregs[r] = regs[r]; end
    for (int a = 0; a < MEMW; a++) begin mem[a] = $urandom; ref_mem[a] = mem[a]; end
    drd = 0;
    foreach (used[ph, r, p]) used[ph][r][p] = 0;
    foreach (exp0[r, p]) exp0[r][p] = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    sum_u = 0;
    for (int i = 0; i < NPC; i++) begin
      pcs[i]  = 32'h0000_8000 + 32'(i * 4 * 7);
      cfgs[i] = biased_cfg(pcs[i] + 32'h80);
      for (int j = 0; j < int'(cfgs[i].hdr.ncols); j++)
        for (int r = 0; r < ROWS; r++)
          if (cfgs[i].cols[j].alu[r] != ALU_NOP) begin sum_u++; exp0[r][j] += NPOS; end
      cwe = 1; cwpc = pcs[i]; cwcfg = cfgs[i];
      @(posedge clk); #1;
    end
    cwe = 0;
    for (int ph = 0; ph < 2; ph++) begin
      rot = (ph == 1);
      @(posedge clk); #1;
      for (int n = 0; n < NEXEC; n++) run_one(n % NPC, ph);
      show(ph);
    end
    mx0 = 0; mx1 = 0;
    for (int r = 0; r < ROWS; r++) for (int p = 0; p < COLS; p++) begin
      checks++;
      if (used[0][r][p] != exp0[r][p]) begin failures++; $display("FAIL held r%0d c%0d: %0d vs %0d", r, p, used[0][r][p], exp0[r][p]); end
      checks++;
      if (used[1][r][p] != sum_u) begin failures++; $display("FAIL moving r%0d c%0d: %0d vs %0d", r, p, used[1][r][p], sum_u); end
      if (used[0][r][p] > mx0) mx0 = used[0][r][p];
      if (used[1][r][p] > mx1) mx1 = used[1][r][p];
    end
    $display("highest FU utilization: held %0d%%, moving %0d%% (average %0d%%)",
             (100 * mx0 + NEXEC / 2) / NEXEC, (100 * mx1 + NEXEC / 2) / NEXEC,
             (100 * sum_u + NEXEC / 2) / NEXEC);
    checks++; if (!(mx1 < mx0)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
