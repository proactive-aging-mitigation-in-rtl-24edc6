// cfg_column_reg: configuration register of one fabric column.
//
// The column listens to all NCFG configuration lines. An NCFG:1 multiplexer
// (`line_sel`) picks the line carrying the virtual column that must land here;
// this is what allows horizontal movement. The selected word then passes three
// barrel shifters (row_rotate) that rotate the input-multiplexer, FU-operation
// and output-multiplexer fields by `vshift` rows (vertical movement) before
// they are stored on `we`. The memory-operation field is not per row and is
// stored unshifted. Both structures follow the paper's reconfiguration logic;
// the field layout and the synchronous clear on reset are this design's own.
// Timing: the register updates on the rising edge where `we` is high.
module cfg_column_reg
  import cgra_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  cfg_lines_t          lines,
  input  logic [$clog2(NCFG)-1:0] line_sel,
  input  logic [ROWW-1:0]     vshift,
  input  logic                we,
  output col_cfg_t            cfg
);
  col_cfg_t picked, shifted;

  assign picked = lines[line_sel];

  row_rotate #(.ROWS(ROWS), .W($bits(imux_cfg_t))) u_shift_imux (
    .in(picked.imux), .amt(vshift), .out(shifted.imux));
  logic [ROWS-1:0][$bits(alu_op_e)-1:0] alu_rot;
  row_rotate #(.ROWS(ROWS), .W($bits(alu_op_e))) u_shift_alu (
    .in(picked.alu), .amt(vshift), .out(alu_rot));
  for (genvar r = 0; r < ROWS; r++) begin : g_alu
    assign shifted.alu[r] = alu_op_e'(alu_rot[r]);
  end
  row_rotate #(.ROWS(ROWS), .W($bits(omux_cfg_t))) u_shift_omux (
    .in(picked.omux), .amt(vshift), .out(shifted.omux));
  assign shifted.mem = picked.mem;

  always_ff @(posedge clk) begin
    if (!rst_n)  cfg <= '0;
    else if (we) cfg <= shifted;
  end
endmodule
