// tb_mem_unit: random loads and stores against a data-cache model with a
// one-cycle read; a load issued in cycle t must be presented in cycle
// t+LD_COLS-1 (4 columns) and nowhere else, stores must reach the cache port
// in their own cycle.
module tb_mem_unit;
  import cgra_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic ldr = 0, str = 0;
  word_t lda = 0, sta = 0, std = 0, ldd;
  logic ldv;
  logic dre, dwe;
  word_t dra, drd, dwa, dwd;
  word_t mem [256];
  word_t expq [$];
  logic  expv [$];

  mem_unit dut (.clk, .rst_n, .ld_req(ldr), .ld_addr(lda), .st_req(str), .st_addr(sta), .st_data(std),
    .ld_data(ldd), .ld_valid(ldv), .dc_rd_en(dre), .dc_rd_addr(dra), .dc_rd_data(drd),
    .dc_wr_en(dwe), .dc_wr_addr(dwa), .dc_wr_data(dwd));
  always #5 clk = ~clk;

  // data cache model: synchronous read, write
  always_ff @(posedge clk) begin
    if (dre) drd <= mem[dra[9:2]];
    if (dwe) mem[dwa[9:2]] <= dwd;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t;
    for (int i = 0; i < 256; i++) mem[i] = $urandom;
    drd = 0;
    @(posedge clk); #1 rst_n = 1;
    for (int i = 0; i < LD_COLS - 1; i++) begin expq.push_back(0); expv.push_back(0); end
    for (t = 0; t < 2000; t++) begin
      ldr = 1'($urandom); lda = $urandom;
      str = 1'($urandom); sta = $urandom; std = $urandom;
      // value the load must return (stores of this cycle land after the read)
      expq.push_back(ldr ? mem[lda[9:2]] : 0); expv.push_back(ldr);
      #1;
      checks++;
      if (ldv !== expv[0] || (ldv && ldd !== expq[0])) begin
        failures++; $display("FAIL t=%0d ldv=%0d exp=%0d data=%h exp=%h", t, ldv, expv[0], ldd, expq[0]);
      end
      checks++;
      if (dwe !== str || (str && (dwa !== sta || dwd !== std)) || dre !== ldr) begin
        failures++; $display("FAIL port t=%0d", t);
      end
      void'(expq.pop_front()); void'(expv.pop_front());
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
