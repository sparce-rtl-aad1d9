// alu: lane-wise integer ALU of the execute stage ("Main/ALU" pipeline).
//
// Adds, subtracts or passes operand b, independently in each of LANES lanes of
// XLEN bits, and compares lane 0 of the two operands for the BNE branch.
// Single cycle, combinational. The published design only names this unit; the
// operation set is this design's choice.
module alu
  import sparce_pkg::*;
#(
  parameter int unsigned LANES = 4,
  localparam int unsigned W    = LANES * XLEN
) (
  input  alu_op_e      op,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W-1:0] y,
  output logic         ne   // lane 0 of a differs from lane 0 of b
);

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      unique case (op)
        ALU_ADD:    y[l*XLEN +: XLEN] = a[l*XLEN +: XLEN] + b[l*XLEN +: XLEN];
        ALU_SUB:    y[l*XLEN +: XLEN] = a[l*XLEN +: XLEN] - b[l*XLEN +: XLEN];
        default:    y[l*XLEN +: XLEN] = b[l*XLEN +: XLEN];
      endcase
    end
    ne = a[XLEN-1:0] != b[XLEN-1:0];
  end

endmodule
