// fu_alu: one functional unit of the fabric, the single-column ALU.
//
// Purely combinational: the result is a function of the operation and the two
// operands. The paper only draws the FU as an adder and says ALU operations fit
// in one column (half a processor cycle); the operation set here (RV32I integer
// register/immediate operations) is this design's choice. ALU_NOP yields 0 and
// drives `busy` low, so an idle FU can be told from a used one.
module fu_alu
  import cgra_pkg::*;
#(
  parameter int W = XLEN
) (
  input  alu_op_e        op,
  input  logic [W-1:0]   a,
  input  logic [W-1:0]   b,
  output logic [W-1:0]   y,
  output logic           busy
);
  localparam int SHW = $clog2(W);

  always_comb begin
    unique case (op)
      ALU_ADD:   y = a + b;
      ALU_SUB:   y = a - b;
      ALU_AND:   y = a & b;
      ALU_OR:    y = a | b;
      ALU_XOR:   y = a ^ b;
      ALU_SLL:   y = a << b[SHW-1:0];
      ALU_SRL:   y = a >> b[SHW-1:0];
      ALU_SRA:   y = W'($signed(a) >>> b[SHW-1:0]);
      ALU_SLT:   y = W'($signed(a) < $signed(b));
      ALU_SLTU:  y = W'(a < b);
      ALU_PASSB: y = b;
      default:   y = '0;
    endcase
    busy = (op != ALU_NOP);
  end
endmodule
