// rob: commits the results of an execution to the GPP register file.
//
// On `start` it captures the final context lines and the configuration's
// output slots. It then walks the slots in order, slot 0 first (program
// order), one slot per cycle, and for every valid slot writes the value of the
// slot's context line to register `rd` through the single write port
// (`rf_we`, `rf_waddr`, `rf_wdata`). Writes to x0 are suppressed. `done`
// pulses in the cycle after the last slot. Latency: NOUT cycles after the
// start cycle. The paper states only that outputs are written back in program
// order; one write per cycle is this design's choice.
module rob
  import cgra_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  ctx_t                      ctx,
  input  out_slot_t [NOUT-1:0]      outs,
  output logic                      busy,
  output logic                      done,
  output logic                      rf_we,
  output logic [REGW-1:0]           rf_waddr,
  output word_t                     rf_wdata
);
  localparam int SW = $clog2(NOUT);

  ctx_t                 ctx_q;
  out_slot_t [NOUT-1:0] outs_q;
  logic [SW-1:0]        slot;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      slot   <= '0;
      ctx_q  <= '0;
      outs_q <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy   <= 1'b1;
        slot   <= '0;
        ctx_q  <= ctx;
        outs_q <= outs;
      end else if (busy) begin
        slot <= slot + 1'b1;
        if (slot == SW'(NOUT - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  // a new write-back may only start once the previous one has finished
  always_ff @(posedge clk)
    if (rst_n) assert (!(start && busy)) else $error("rob started while busy");

  always_comb begin
    rf_we    = busy && outs_q[slot].v && (outs_q[slot].rd != '0);
    rf_waddr = outs_q[slot].rd;
    rf_wdata = ctx_q[outs_q[slot].line];
  end
endmodule
