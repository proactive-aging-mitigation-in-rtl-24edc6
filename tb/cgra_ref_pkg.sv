// cgra_ref_pkg: reference model and stimulus helpers for the testbenches.
//
// ref_exec runs a virtual configuration column by column exactly as written
// (no movement) on a context and on the package's data memory `ref_mem`, so a
// testbench can compare the fabric, at any pivot, against the unmoved meaning
// of the configuration. rand_vcfg builds legal random configurations: every
// context line is driven by at most one source per column, and a load issued
// in virtual column j has its result written in column j+LD_COLS-1.
package cgra_ref_pkg;
  import cgra_pkg::*;

  localparam int MEMW = 256;          // words of data memory in the models
  word_t ref_mem [MEMW];

  function automatic int unsigned midx(input word_t a);
    return int'(a[9:2]);
  endfunction

  function automatic word_t ref_alu(input alu_op_e op, input word_t a, input word_t b);
    logic signed [XLEN-1:0] sa, sb;
    sa = a; sb = b;
    case (op)
      ALU_ADD:   return a + b;
      ALU_SUB:   return a - b;
      ALU_AND:   return a & b;
      ALU_OR:    return a | b;
      ALU_XOR:   return a ^ b;
      ALU_SLL:   return a << (b % XLEN);
      ALU_SRL:   return a >> (b % XLEN);
      ALU_SRA:   return sa >>> (b % XLEN);
      ALU_SLT:   return (sa < sb) ? 1 : 0;
      ALU_SLTU:  return (a < b) ? 1 : 0;
      ALU_PASSB: return b;
      default:   return 0;
    endcase
  endfunction

  function automatic word_t sx(input logic [IMMW-1:0] i);
    return {{(XLEN-IMMW){i[IMMW-1]}}, i};
  endfunction

  // one column, as written; `ldv` is the load result arriving in it
  function automatic ctx_t ref_col(input col_cfg_t c, input ctx_t x, input word_t ldv,
                                   output int nbusy);
    ctx_t o;
    o = x;
    nbusy = 0;
    for (int r = 0; r < ROWS; r++) begin
      word_t a, b, y;
      a = x[c.imux[r].sel_a];
      b = c.imux[r].use_imm ? sx(c.imux[r].imm) : x[c.imux[r].sel_b];
      y = ref_alu(c.alu[r], a, b);
      if (c.alu[r] != ALU_NOP) begin
        nbusy++;
        for (int l = 0; l < NCTX; l++) if (c.omux[r][l]) o[l] = y;
      end
    end
    for (int l = 0; l < NCTX; l++) if (c.mem.ld_wmask[l]) o[l] = ldv;
    return o;
  endfunction

  // whole configuration; updates ref_mem
  function automatic ctx_t ref_exec(input vcfg_t v, input ctx_t init);
    ctx_t x;
    word_t ret [COLS + LD_COLS];
    int nb;
    x = init;
    foreach (ret[i]) ret[i] = 0;
    for (int j = 0; j < int'(v.hdr.ncols); j++) begin
      col_cfg_t c;
      c = v.cols[j];
      if (c.mem.ld_en) ret[j + LD_COLS - 1] = ref_mem[midx(x[c.mem.ld_base] + sx(c.mem.ld_off))];
      if (c.mem.st_en) ref_mem[midx(x[c.mem.st_base] + sx(c.mem.st_off))] = x[c.mem.st_data];
      x = ref_col(c, x, ret[j], nb);
    end
    return x;
  endfunction

  function automatic alu_op_e rand_op();
    int unsigned k;
    k = $urandom_range(0, 14);
    if (k > 11) return ALU_NOP;
    return alu_op_e'(k);
  endfunction

  // random column; memory fields left empty
  function automatic col_cfg_t rand_col();
    col_cfg_t c;
    logic [NCTX-1:0] taken;
    c = '0;
    taken = '0;
    for (int r = 0; r < ROWS; r++) begin
      c.imux[r].sel_a   = CTXW'($urandom);
      c.imux[r].sel_b   = CTXW'($urandom);
      c.imux[r].use_imm = 1'($urandom);
      c.imux[r].imm     = IMMW'($urandom);
      c.alu[r]          = rand_op();
      c.omux[r]         = NCTX'($urandom) & ~taken;
      taken            |= c.omux[r];
    end
    return c;
  endfunction

  function automatic vcfg_t rand_vcfg(input int ncols, input bit use_mem, input logic [PCW-1:0] next_pc);
    vcfg_t v;
    v = '0;
    v.hdr.next_pc = next_pc;
    v.hdr.ncols   = (COLW+1)'(ncols);
    for (int l = 0; l < NCTX; l++) begin
      v.hdr.in_map[l].v = ($urandom_range(0, 3) != 0);
      v.hdr.in_map[l].r = REGW'($urandom);
    end
    for (int s = 0; s < NOUT; s++) begin
      v.hdr.outs[s].v    = 1'($urandom);
      v.hdr.outs[s].rd   = REGW'($urandom);
      v.hdr.outs[s].line = CTXW'($urandom);
    end
    for (int j = 0; j < ncols; j++) v.cols[j] = rand_col();
    if (use_mem)
      for (int j = 0; j + LD_COLS - 1 < ncols; j++) begin
        if ($urandom_range(0, 2) == 0) begin
          logic [NCTX-1:0] m;
          v.cols[j].mem.ld_en   = 1'b1;
          v.cols[j].mem.ld_base = CTXW'($urandom);
          v.cols[j].mem.ld_off  = IMMW'($urandom);
          m = NCTX'(1) << $urandom_range(0, NCTX - 1);
          v.cols[j + LD_COLS - 1].mem.ld_wmask = m;
          for (int r = 0; r < ROWS; r++) v.cols[j + LD_COLS - 1].omux[r] &= ~m;
        end
        if ($urandom_range(0, 2) == 0) begin
          v.cols[j].mem.st_en   = 1'b1;
          v.cols[j].mem.st_base = CTXW'($urandom);
          v.cols[j].mem.st_data = CTXW'($urandom);
          v.cols[j].mem.st_off  = IMMW'($urandom);
        end
      end
    return v;
  endfunction

  // column word after vertical movement by vs rows
  function automatic col_cfg_t ref_vmove(input col_cfg_t c, input int vs);
    col_cfg_t o;
    o = c;
    for (int r = 0; r < ROWS; r++) begin
      o.imux[(r + vs) % ROWS] = c.imux[r];
      o.alu [(r + vs) % ROWS] = c.alu[r];
      o.omux[(r + vs) % ROWS] = c.omux[r];
    end
    return o;
  endfunction
endpackage
