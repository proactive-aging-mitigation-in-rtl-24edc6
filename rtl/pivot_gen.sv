// pivot_gen: position of the configuration pivot for the next execution.
//
// The pivot (row offset `vshift`, column offset `hshift`) starts at row 0,
// column 0. Each `advance` (one per new execution) moves it one column to the
// right; after the last column it returns to column 0 of the next row, and
// after the last row to row 0: the row-by-row sweep of the paper, which visits
// every one of the ROWS*COLS positions. With `enable` low the pivot is held at
// 0/0 and configurations run where they were generated (unmodified
// allocation). Step size 1 and the enable are this design's choices.
module pivot_gen
  import cgra_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            enable,
  input  logic            advance,
  output logic [COLW-1:0] hshift,
  output logic [ROWW-1:0] vshift
);
  always_ff @(posedge clk) begin
    if (!rst_n || !enable) begin
      hshift <= '0;
      vshift <= '0;
    end else if (advance) begin
      if (hshift == COLW'(COLS - 1)) begin
        hshift <= '0;
        vshift <= (vshift == ROWW'(ROWS - 1)) ? '0 : vshift + 1'b1;
      end else begin
        hshift <= hshift + 1'b1;
      end
    end
  end
endmodule
