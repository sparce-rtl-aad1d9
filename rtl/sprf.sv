// sprf: Sparsity Register File.
//
// One entry per architectural register, each holding two fields: isSparse,
// one bit per SIMD lane that is 1 while that lane of the register holds zero,
// and regUpdInFlight, set while an instruction that will write the register
// is in the pipeline. The whole file is visible at once on its outputs, so the
// fetch-stage logic can read any number of entries in the same cycle (the
// published design calls it multi-ported and places it in the fetch stage).
//
// Updates, all taking effect at the next clock edge:
//   set_*   : decode issued an instruction writing set_rd -> regUpdInFlight=1
//   upd_*   : the sparse value checker at writeback reports the new value's
//             zero lanes -> isSparse=upd_sparse, regUpdInFlight=0
//   clr_mask: instructions squashed in flight -> regUpdInFlight=0
// A set and a clear of the same entry in one cycle leave it set (a newer
// writer wins). This design's choice: after reset every register reads zero
// (the register file resets to zero), so every isSparse bit resets to 1.
module sprf
  import sparce_pkg::*;
#(
  parameter int unsigned LANES = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  set_valid,
  input  reg_idx_t              set_rd,
  input  logic                  upd_valid,
  input  reg_idx_t              upd_rd,
  input  logic [LANES-1:0]      upd_sparse,
  input  logic [NREG-1:0]       clr_mask,
  output logic [LANES-1:0]      is_sparse [NREG],
  output logic [NREG-1:0]       in_flight
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < NREG; r++) is_sparse[r] <= '1;
      in_flight <= '0;
    end else begin
      for (int r = 0; r < NREG; r++) begin
        if (upd_valid && upd_rd == reg_idx_t'(r)) is_sparse[r] <= upd_sparse;
        if (set_valid && set_rd == reg_idx_t'(r))
          in_flight[r] <= 1'b1;
        else if ((upd_valid && upd_rd == reg_idx_t'(r)) || clr_mask[r])
          in_flight[r] <= 1'b0;
      end
    end
  end

endmodule
