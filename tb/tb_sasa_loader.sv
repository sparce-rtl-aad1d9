// tb_sasa_loader: self-checking test of the SASA-LD sequencer.
// A 32-bit data port (two rows per 64-bit entry image) exercises the row
// assembly. A memory model holds random entry images; the test runs
// SASA-LD with size 5, then size 0, then a size larger than the table, and
// checks: the table is cleared once at the start, every entry is written at
// the right index with the image read from base + 8*index, addresses advance
// one row per cycle, and 'done' comes exactly size*ROWS + 2 cycles after the
// start cycle.
module tb_sasa_loader;
  import sparce_pkg::*;
  localparam int DATA_W = 32;
  localparam int N = 8;
  localparam int ROWS = 2;
  logic clk = 0, rst_n = 0;
  logic start, busy, done, rd_req, tbl_clear, tbl_wr_en;
  logic [31:0] base, rd_addr;
  logic [15:0] size;
  logic [DATA_W-1:0] rd_data;
  logic [$clog2(N)-1:0] tbl_wr_idx;
  sasa_entry_t tbl_wr_entry;
  logic [DATA_W-1:0] mem [256];
  int checks = 0, failures = 0;
  int clears, writes;
  sasa_entry_t got [N];
  logic [N-1:0] got_v;

  sasa_loader #(.DATA_W(DATA_W), .ENTRIES(N)) dut (.*);
  always #5 clk = ~clk;
  assign rd_data = mem[rd_addr[9:2]];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (tbl_clear) begin clears++; got_v = '0; end
    if (tbl_wr_en) begin writes++; got[tbl_wr_idx] = tbl_wr_entry; got_v[tbl_wr_idx] = 1'b1; end
  end

  task automatic run(int b, int sz);
    int cyc, exp_n;
    logic [63:0] img;
    clears = 0; writes = 0;
    @(negedge clk);
    base = 32'(b); size = 16'(sz); start = 1;
    cyc = 0;
    do begin
      @(posedge clk); #1;
      cyc++;
    end while (!done && cyc < 200);
    @(negedge clk); start = 0;
    exp_n = (sz > N) ? N : sz;
    checks++;
    if (cyc != exp_n * ROWS + 2) begin failures++; $display("size %0d: done after %0d cycles, exp %0d", sz, cyc, exp_n*ROWS+2); end
    checks++;
    if (clears != 1 || writes != exp_n) begin failures++; $display("size %0d: clears %0d writes %0d", sz, clears, writes); end
    for (int e = 0; e < N; e++) begin
      img = {mem[(b >> 2) + 2*e + 1], mem[(b >> 2) + 2*e]};
      checks++;
      if (e < exp_n) begin
        if (!got_v[e] || got[e] !== sasa_entry_t'(img[$bits(sasa_entry_t)-1:0])) begin
          failures++; $display("entry %0d wrong: %h exp %h", e, got[e], img);
        end
      end else if (got_v[e]) begin
        failures++; $display("entry %0d written but beyond size", e);
      end
    end
  endtask

  initial begin
    start = 0; base = 0; size = 0;
    for (int i = 0; i < 256; i++) mem[i] = $urandom;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    checks++;
    if (busy || done || rd_req) begin failures++; $display("not idle after reset"); end
    run(64, 5);
    run(256, 0);
    run(128, 13);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
