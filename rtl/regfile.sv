// regfile: architectural register file of the in-order core.
//
// NREG registers of LANES x XLEN bits (a scalar core is LANES = 1). Three
// combinational read ports serve decode (two sources plus the accumulator /
// store-data operand, which this design reads through the rd field); one
// write port is used by writeback and takes effect at the clock edge. A read
// of the register being written in the same cycle returns the new value, so
// an instruction waiting in decode can issue in the cycle its producer writes
// back. All registers reset to zero, matching the SpRF reset state.
// The published design names this block but does not describe it.
module regfile
  import sparce_pkg::*;
#(
  parameter int unsigned LANES = 4,
  localparam int unsigned W    = LANES * XLEN
) (
  input  logic          clk,
  input  logic          rst_n,
  input  reg_idx_t      ra, rb, rc,
  output logic [W-1:0]  da, db, dc,
  input  logic          we,
  input  reg_idx_t      wa,
  input  logic [W-1:0]  wd
);

  logic [W-1:0] regs [NREG];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < NREG; r++) regs[r] <= '0;
    end else if (we) begin
      regs[wa] <= wd;
    end
  end

  assign da = (we && wa == ra) ? wd : regs[ra];
  assign db = (we && wa == rb) ? wd : regs[rb];
  assign dc = (we && wa == rc) ? wd : regs[rc];

endmodule
