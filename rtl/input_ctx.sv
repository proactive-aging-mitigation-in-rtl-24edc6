// input_ctx: the input context, i.e. the register values that feed the
// context lines at the start of an execution.
//
// Holds NCTX words. `clear` zeroes all of them (lines that a configuration
// does not map to a register start at 0). Each cycle up to NWR lines can be
// written (`we[i]`, `idx[i]`, `data[i]`), matching the GPP register file's read
// ports that supply them; NWR = 2 (two RISC-V read ports) is this design's
// choice. Written values appear on `ctx` after the rising edge.
module input_ctx
  import cgra_pkg::*;
#(
  parameter int NWR = 2
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  input  logic  [NWR-1:0]            we,
  input  logic  [NWR-1:0][CTXW-1:0]  idx,
  input  word_t [NWR-1:0]            data,
  output ctx_t                       ctx
);
  always_ff @(posedge clk) begin
    if (!rst_n || clear) ctx <= '0;
    else
      for (int i = 0; i < NWR; i++)
        if (we[i]) ctx[idx[i]] <= data[i];
  end
endmodule
