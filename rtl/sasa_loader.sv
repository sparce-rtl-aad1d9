// sasa_loader: sequencer for the SASA-LD [Rn], #size instruction.
//
// SASA-LD copies 'size' SASA entries from memory, starting at the address in
// Rn, into the SASA table. The published design defines the instruction and
// its operands; how it is sequenced is this design's choice:
//   * While the instruction sits in the execute stage the core holds 'start'
//     high. In the first cycle the loader invalidates the whole table, so
//     entries beyond 'size' are empty afterwards.
//   * Each entry is a SASA_IMG_W (64) bit word in memory, read as
//     ROWS = ceil(64 / DATA_W) consecutive data-memory rows, lowest row first.
//     One row is read per cycle over the core's data port (combinational
//     read, same cycle). Counting the cycle 'start' is first seen as cycle
//     0, 'done' is high in cycle size*ROWS + 2 (one clear cycle, one cycle
//     per row, one done cycle). 'size' is clamped to the table size.
//   * 'done' is high for one cycle at the end; the core then lets the
//     instruction leave execute.
module sasa_loader
  import sparce_pkg::*;
#(
  parameter int unsigned DATA_W  = 128,
  parameter int unsigned ENTRIES = SASA_ENTRIES,
  localparam int unsigned IDX_W  = $clog2(ENTRIES),
  localparam int unsigned ROWS   = (SASA_IMG_W + DATA_W - 1) / DATA_W,
  localparam int unsigned RW     = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [31:0]       base,
  input  logic [15:0]       size,
  output logic              busy,
  output logic              done,
  // data memory read port
  output logic              rd_req,
  output logic [31:0]       rd_addr,
  input  logic [DATA_W-1:0] rd_data,
  // SASA table write port
  output logic              tbl_clear,
  output logic              tbl_wr_en,
  output logic [IDX_W-1:0]  tbl_wr_idx,
  output sasa_entry_t       tbl_wr_entry
);

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_DONE} state_e;

  state_e                    state;
  logic [31:0]               addr_q;
  logic [IDX_W:0]            count_q, idx_q;
  logic [RW-1:0]             row_q;
  logic [ROWS*DATA_W-1:0]    buf_q;
  logic [ROWS*DATA_W-1:0]    img;
  logic [IDX_W:0]            count_d;

  always_comb begin
    count_d = (size > 16'(ENTRIES)) ? (IDX_W+1)'(ENTRIES) : (IDX_W+1)'(size);
    // the entry image as it will look once the current row is in
    img = buf_q;
    img[row_q*DATA_W +: DATA_W] = rd_data;
  end

  assign busy         = (state != S_IDLE);
  assign done         = (state == S_DONE);
  assign tbl_clear    = (state == S_IDLE) && start;
  assign rd_req       = (state == S_LOAD) && (idx_q < count_q);
  assign rd_addr      = addr_q;
  assign tbl_wr_en    = rd_req && (row_q == RW'(ROWS - 1));
  assign tbl_wr_idx   = idx_q[IDX_W-1:0];
  assign tbl_wr_entry = sasa_entry_t'(img[$bits(sasa_entry_t)-1:0]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      addr_q  <= '0;
      count_q <= '0;
      idx_q   <= '0;
      row_q   <= '0;
      buf_q   <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state   <= S_LOAD;
          addr_q  <= base;
          count_q <= count_d;
          idx_q   <= '0;
          row_q   <= '0;
        end
        S_LOAD: begin
          if (idx_q >= count_q) begin
            state <= S_DONE;
          end else begin
            buf_q  <= img;
            addr_q <= addr_q + 32'(DATA_W / 8);
            if (row_q == RW'(ROWS - 1)) begin
              row_q <= '0;
              idx_q <= idx_q + 1'b1;
            end else begin
              row_q <= row_q + 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
