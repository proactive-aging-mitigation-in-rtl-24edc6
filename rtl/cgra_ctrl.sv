// cgra_ctrl: control unit ("Ctrl") of the reconfigurable unit.
//
// Runs one accelerated sequence at a time:
//   IDLE  - while the GPP presents a PC (`pc_valid`) that hits in the
//           configuration cache, latch the entry, clear the input context and
//           raise `busy` (the GPP waits).
//   LOAD  - NLOAD cycles. In cycle k < NBEAT, beat k of the configuration is
//           on the configuration lines and `beat_valid` lets the
//           reconfiguration logic write the matching columns. In parallel, two
//           context lines per cycle are filled from the GPP register file
//           through its two read ports, following the entry's input map.
//   EXEC  - ncols cycles, one column step each, starting at the pivot column
//           `hshift` and wrapping modulo COLS; the first step takes the input
//           context.
//   WB    - starts the ROB on the last column's context level and waits for it
//           to commit the output registers in program order.
//   DONE  - one cycle: `done` with the resume PC, and the pivot advances.
// Busy time of a sequence: NLOAD + ncols + NOUT + 3 cycles, counted from the cycle after
// the hit. The sequencing follows the paper's execution steps 4-7; the
// overlap of configuration and register loading, and all cycle counts, are
// this design's choices.
module cgra_ctrl
  import cgra_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  // GPP
  input  logic                        pc_valid,
  output logic                        busy,
  output logic                        done,
  output logic [PCW-1:0]              next_pc,
  output logic [1:0][REGW-1:0]        rf_raddr,
  // configuration cache
  input  logic                        lk_hit,
  input  logic [$clog2(CFG_ENTRIES)-1:0] lk_idx,
  output logic [$clog2(CFG_ENTRIES)-1:0] rd_idx,
  input  cfg_hdr_t                    hdr,
  // reconfiguration logic
  output logic                        beat_valid,
  output logic [$clog2(NBEAT > 1 ? NBEAT : 2)-1:0] beat,
  // input context
  output logic                        ctx_clear,
  output logic [1:0]                  ctx_we,
  output logic [1:0][CTXW-1:0]        ctx_idx,
  // fabric
  input  logic [COLW-1:0]             hshift,
  output logic                        step,
  output logic [COLW-1:0]             cur,
  output logic                        first,
  output logic [COLW-1:0]             res_col,
  // ROB
  output logic                        rob_start,
  input  logic                        rob_done,
  // pivot
  output logic                        advance
);
  localparam int NRD   = (NCTX + 1) / 2;
  localparam int NLOAD = (NBEAT > NRD) ? NBEAT : NRD;
  localparam int LCW   = $clog2(NLOAD + 1);
  localparam int BW    = $clog2(NBEAT > 1 ? NBEAT : 2);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_EXEC, S_WBST, S_WB, S_DONE} state_e;
  state_e state;

  logic [LCW-1:0]  lc;
  logic [COLW:0]   k;
  logic [COLW:0]   ncols;

  assign ncols = (hdr.ncols == '0) ? (COLW+1)'(1)
               : (hdr.ncols > (COLW+1)'(COLS)) ? (COLW+1)'(COLS) : hdr.ncols;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      rd_idx <= '0;
      lc     <= '0;
      k      <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (pc_valid && lk_hit) begin
          rd_idx <= lk_idx;
          lc     <= '0;
          state  <= S_LOAD;
        end
        S_LOAD: begin
          lc <= lc + 1'b1;
          if (lc == LCW'(NLOAD - 1)) begin
            k     <= '0;
            state <= S_EXEC;
          end
        end
        S_EXEC: begin
          k <= k + 1'b1;
          if (k == ncols - 1'b1) state <= S_WBST;
        end
        S_WBST: state <= S_WB;
        S_WB:   if (rob_done) state <= S_DONE;
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy       = (state != S_IDLE);
    ctx_clear  = (state == S_IDLE) && pc_valid && lk_hit;
    beat_valid = (state == S_LOAD) && (lc < LCW'(NBEAT));
    beat       = BW'(lc);
    for (int i = 0; i < 2; i++) begin
      ctx_idx[i]  = CTXW'(2 * int'(lc) + i);
      rf_raddr[i] = hdr.in_map[ctx_idx[i]].r;
      ctx_we[i]   = (state == S_LOAD) && ((2 * int'(lc) + i) < NCTX) && hdr.in_map[ctx_idx[i]].v;
    end
    step      = (state == S_EXEC);
    cur       = hshift + COLW'(k);
    first     = (state == S_EXEC) && (k == '0);
    res_col   = hshift + COLW'(ncols - 1'b1);
    rob_start = (state == S_WBST);
    done      = (state == S_DONE);
    advance   = (state == S_DONE);
    next_pc   = hdr.next_pc;
  end
endmodule
