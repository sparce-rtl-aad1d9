// svc: Sparse Value Checker.
//
// Sits in the writeback stage. For every instruction that writes a register it
// compares the result with zero, lane by lane, and hands the SpRF the update
// for the destination register: the zero-lane mask becomes the new isSparse
// value and regUpdInFlight is cleared. This follows the published design
// (a comparator against the constant 0 in writeback); the per-lane compare is
// how the vector form of isSparse, one bit per word, is produced.
// Purely combinational: the update is registered by the SpRF at the end of the
// writeback cycle.
module svc
  import sparce_pkg::*;
#(
  parameter int unsigned LANES = 4
) (
  input  logic                  wb_valid,   // an instruction writes back this cycle
  input  logic                  wb_writes,  // ... and it writes a register
  input  reg_idx_t              wb_rd,
  input  logic [LANES*XLEN-1:0] wb_data,
  output logic                  upd_valid,
  output reg_idx_t              upd_rd,
  output logic [LANES-1:0]      upd_sparse
);

  always_comb begin
    upd_valid = wb_valid && wb_writes;
    upd_rd    = wb_rd;
    for (int l = 0; l < LANES; l++)
      upd_sparse[l] = (wb_data[l*XLEN +: XLEN] == '0);
  end

endmodule
