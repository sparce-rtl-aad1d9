// sasa_table: Sparsity Aware Skip Address table.
//
// An associative memory of ENTRIES entries, each {precedingPC, instsToSkip,
// SpRFCondition} plus a valid bit. Every cycle the fetch PC is compared with
// all valid precedingPC fields in parallel; on a match 'hit' is raised and the
// matching entry is returned (the lowest-numbered one if software loaded two
// entries with the same PC). The table is written only by the SASA-LD
// sequencer: 'clear' invalidates every entry, 'wr_en' writes one entry by
// index and marks it valid. Lookup is combinational, so it runs in parallel
// with the instruction fetch, as in the published design; writes take effect
// at the next clock edge. Entries are invalid after reset (this design's
// choice; the paper does not say).
module sasa_table
  import sparce_pkg::*;
#(
  parameter int unsigned ENTRIES = SASA_ENTRIES,
  localparam int unsigned IDX_W  = $clog2(ENTRIES)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             wr_en,
  input  logic [IDX_W-1:0] wr_idx,
  input  sasa_entry_t      wr_entry,
  input  pc_t              lookup_pc,
  output logic             hit,
  output sasa_entry_t      hit_entry
);

  sasa_entry_t         mem   [ENTRIES];
  logic [ENTRIES-1:0]  valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0;
    end else if (clear) begin
      valid <= '0;
    end else if (wr_en && wr_idx < IDX_W'(ENTRIES)) begin
      valid[wr_idx] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en && wr_idx < IDX_W'(ENTRIES)) mem[wr_idx] <= wr_entry;
  end

  always_comb begin
    hit       = 1'b0;
    hit_entry = '0;
    for (int e = ENTRIES - 1; e >= 0; e--) begin
      if (valid[e] && mem[e].pc == lookup_pc) begin
        hit       = 1'b1;
        hit_entry = mem[e];
      end
    end
  end

endmodule
