// mac_unit: lane-wise multiply / multiply-accumulate of the execute stage
// ("MAC pipeline").
//
// mode 0 (MUL): y[l] = a[l] * b[l] for every lane l.
// mode 1 (MAC): y[l] = acc[l] + a[l] * b[sel], the second factor broadcast
//               from lane 'sel' of b, the form of the SIMD fmla instruction
//               that the sparse GEMM kernel relies on (one shared operand,
//               so one zero lane of b makes the whole instruction redundant).
// Integer arithmetic, low XLEN bits kept; single cycle, combinational. The
// published design uses floating point and does not describe this unit; the
// integer datapath is this design's choice (zero detection is unchanged).
module mac_unit
  import sparce_pkg::*;
#(
  parameter int unsigned LANES = 4,
  localparam int unsigned W    = LANES * XLEN
) (
  input  logic         mode,   // 0: MUL, 1: MAC with broadcast
  input  logic [2:0]   sel,
  input  logic [W-1:0] acc,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W-1:0] y
);

  logic [XLEN-1:0] bcast;

  always_comb begin
    bcast = b[XLEN-1:0];
    for (int l = 0; l < LANES; l++)
      if (3'(l) == sel) bcast = b[l*XLEN +: XLEN];
    for (int l = 0; l < LANES; l++) begin
      if (mode) y[l*XLEN +: XLEN] = acc[l*XLEN +: XLEN] + a[l*XLEN +: XLEN] * bcast;
      else      y[l*XLEN +: XLEN] = a[l*XLEN +: XLEN] * b[l*XLEN +: XLEN];
    end
  end

endmodule
