// row_rotate: barrel shifter that rotates per-row configuration fields.
//
// Field r of the input appears at row (r + amt) mod ROWS of the output, so a
// configuration generated for rows 0..ROWS-1 is moved down by `amt` rows and
// wraps from the last row to the first. It is the "Shift" block placed in front
// of the input-multiplexer, FU and output-multiplexer configuration registers
// of every column (vertical movement). Implemented as log2(ROWS) stages of
// conditional rotations; combinational.
module row_rotate #(
  parameter int ROWS = 2,
  parameter int W    = 8,
  parameter int AW   = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic [ROWS-1:0][W-1:0] in,
  input  logic [AW-1:0]          amt,
  output logic [ROWS-1:0][W-1:0] out
);
  localparam int NST = (ROWS > 1) ? $clog2(ROWS) : 1;

  logic [NST:0][ROWS-1:0][W-1:0] st;

  assign st[0] = in;
  for (genvar s = 0; s < NST; s++) begin : g_stage
    for (genvar r = 0; r < ROWS; r++) begin : g_row
      // rotate by 2**s rows when bit s of the amount is set
      assign st[s+1][(r + (1 << s)) % ROWS] = amt[s] ? st[s][r] : st[s][(r + (1 << s)) % ROWS];
    end
  end
  assign out = st[NST];
endmodule
