// tb_cfg_cache: fills the cache with random configurations at random PCs,
// checks hits, misses (empty entry, other tag, after invalidate), and that
// every read beat presents the right NCFG column words and the header.
module tb_cfg_cache;
  import cgra_pkg::*;
  import cgra_ref_pkg::*;
  localparam int IW = $clog2(CFG_ENTRIES);
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, inval = 0, we = 0;
  logic [PCW-1:0] wpc = '0, lpc = '0;
  vcfg_t wcfg;
  logic hit;
  logic [IW-1:0] lidx, ridx = '0;
  logic [$clog2(NBEAT > 1 ? NBEAT : 2)-1:0] beat = '0;
  cfg_lines_t lines;
  cfg_hdr_t hdr;
  vcfg_t model [CFG_ENTRIES];
  logic [PCW-1:0] mpc [CFG_ENTRIES];
  logic mv [CFG_ENTRIES];

  cfg_cache dut (.clk, .rst_n, .inval, .wr_en(we), .wr_pc(wpc), .wr_cfg(wcfg), .lk_pc(lpc),
    .lk_hit(hit), .lk_idx(lidx), .rd_idx(ridx), .beat, .lines, .hdr);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_pc(input logic [PCW-1:0] pc);
    int i;
    i = int'(pc[2 +: IW]);
    lpc = pc; #1;
    checks++;
    if (hit !== (mv[i] && mpc[i] == pc)) begin failures++; $display("FAIL hit pc=%h", pc); end
    if (hit) begin
      ridx = lidx;
      for (int k = 0; k < NBEAT; k++) begin
        beat = k[$bits(beat)-1:0]; #1;
        for (int m = 0; m < NCFG; m++) begin
          checks++;
          if (lines[m] !== model[i].cols[k * NCFG + m]) begin failures++; $display("FAIL line"); end
        end
      end
      checks++; if (hdr !== model[i].hdr) begin failures++; $display("FAIL hdr"); end
    end
  endtask

  initial begin
    for (int i = 0; i < CFG_ENTRIES; i++) mv[i] = 0;
    @(posedge clk); #1 rst_n = 1;
    for (int n = 0; n < 20; n++) check_pc({$urandom} & ~32'h3);
    for (int n = 0; n < 200; n++) begin
      int i;
      wpc = {$urandom_range(0, 3), 24'h0, 4'h0, 2'b00} | ({$urandom} & 32'h0000_00fc);
      wcfg = rand_vcfg($urandom_range(1, COLS), 1'b1, $urandom);
      we = 1;
      @(posedge clk); #1 we = 0;
      i = int'(wpc[2 +: IW]);
      mv[i] = 1; mpc[i] = wpc; model[i] = wcfg;
      check_pc(wpc);
      check_pc({$urandom_range(0, 3), 24'h0, 4'h0, 2'b00} | ({$urandom} & 32'h0000_00fc));
    end
    inval = 1; @(posedge clk); #1 inval = 0;
    for (int i = 0; i < CFG_ENTRIES; i++) mv[i] = 0;
    for (int i = 0; i < CFG_ENTRIES; i++) if (mpc[i] !== 'x) check_pc(mpc[i]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
