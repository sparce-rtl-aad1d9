// tb_gemm_kernel: an 8x4 GEMM micro-kernel on the sparsity-aware core, at the
// core's default parameters.
//
// The kernel has the shape of the vectorised matrix-multiply inner loops the
// scheme is aimed at: per step k it loads an 8-row column of A into v0/v1 and
// a 4-wide row of the sparse matrix B into v8, then issues eight broadcast
// multiply-accumulates, two per lane j of v8:
//   C[0..3][j] += v0 * v8[j]    C[4..7][j] += v1 * v8[j]
// (accumulators v16..v23). The SASA table holds one entry per lane of v8:
// "skip the two MACs of lane j if v8 lane j is zero". Each pair is preceded
// by an instruction that is not itself skippable (pointer updates, the loop
// counter, or a NOP), so every pair has a precedingPC that is always fetched.
// The B row is loaded four instructions before the first entry, so its zero
// flags are settled when fetch reaches the entries: every redundant pair is
// skipped before it is fetched.
//
// Checked, with and without the table loaded: every element of C against a
// reference product, that the number of skips equals the number of zeros in
// B, that nothing is squashed or marked pending, and the cycle count: a
// skipped pair must save exactly two cycles, and loading four entries costs
// four cycles more than SASA-LD #0 (one data row per entry), so
//   cycles(without table) - cycles(with table) = 2 * zeros(B) - 4.
module tb_gemm_kernel;
  import sparce_pkg::*;
  localparam int LANES = 4;
  localparam int W = LANES * XLEN;
  localparam int K = 12;
  localparam int AB = 'h100, BB = 'h400, TBL = 'h600;
  localparam int LOOP = 6;  // index of the first loop instruction

  logic clk = 0, rst_n = 0;
  pc_t imem_addr;
  logic [31:0] imem_rdata;
  logic dmem_req, dmem_we, halted;
  logic [31:0] dmem_addr;
  logic [W-1:0] dmem_wdata, dmem_rdata;
  perf_t perf;

  logic [31:0] imem [64];
  logic [W-1:0] dmem [256];
  int checks = 0, failures = 0;
  int a [8][K], b [K][4], c [8][4];
  int zeros;

  sparce_core dut (.*);

  always #5 clk = ~clk;
  assign imem_rdata = imem[imem_addr[7:2]];
  assign dmem_rdata = dmem[dmem_addr[11:4]];
  always @(posedge clk) if (dmem_we) dmem[dmem_addr[11:4]] <= dmem_wdata;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] entry(int p, int lane);
    sasa_entry_t e;
    e = '{pc: pc_t'(p * 4), skip: SKIP_W'(2),
          cond: '{op: COND_SINGLE, a: sel_lane(8, lane), b: sel_reg(0)}};
    return 64'(e);
  endfunction

  task automatic load_program(int nent);
    for (int i = 0; i < 64; i++) imem[i] = enc_i(OP_HALT, 0, 0, 0);
    imem[0]  = enc_i(OP_ADDI, 10, 20, AB);
    imem[1]  = enc_i(OP_ADDI, 11, 20, BB);
    imem[2]  = enc_i(OP_ADDI, 14, 20, K);
    imem[3]  = enc_i(OP_ADDI, 15, 20, TBL);
    imem[4]  = enc_i(OP_SASA_LD, 0, 15, nent);
    imem[5]  = enc_i(OP_NOP, 0, 0, 0);
    imem[LOOP + 0]  = enc_i(OP_LD, 8, 11, 0);        // v8 = B[k][0..3]
    imem[LOOP + 1]  = enc_i(OP_LD, 0, 10, 0);        // v0 = A[0..3][k]
    imem[LOOP + 2]  = enc_i(OP_LD, 1, 10, 16);       // v1 = A[4..7][k]
    imem[LOOP + 3]  = enc_i(OP_ADDI, 11, 11, 16);
    imem[LOOP + 4]  = enc_i(OP_ADDI, 10, 10, 32);    // entry lane 0
    imem[LOOP + 5]  = enc_r(OP_MAC, 16, 0, 8, 0);
    imem[LOOP + 6]  = enc_r(OP_MAC, 17, 1, 8, 0);
    imem[LOOP + 7]  = enc_i(OP_ADDI, 13, 13, 1);     // entry lane 1
    imem[LOOP + 8]  = enc_r(OP_MAC, 18, 0, 8, 1);
    imem[LOOP + 9]  = enc_r(OP_MAC, 19, 1, 8, 1);
    imem[LOOP + 10] = enc_i(OP_NOP, 0, 0, 0);        // entry lane 2
    imem[LOOP + 11] = enc_r(OP_MAC, 20, 0, 8, 2);
    imem[LOOP + 12] = enc_r(OP_MAC, 21, 1, 8, 2);
    imem[LOOP + 13] = enc_i(OP_NOP, 0, 0, 0);        // entry lane 3
    imem[LOOP + 14] = enc_r(OP_MAC, 22, 0, 8, 3);
    imem[LOOP + 15] = enc_r(OP_MAC, 23, 1, 8, 3);
    imem[LOOP + 16] = enc_i(OP_BNE, 13, 14, -16);
    imem[LOOP + 17] = enc_i(OP_HALT, 0, 0, 0);

    for (int i = 0; i < 256; i++) dmem[i] = '0;
    for (int k = 0; k < K; k++) begin
      for (int r = 0; r < 4; r++) begin
        dmem[(AB >> 4) + 2 * k][r*XLEN +: XLEN]     = a[r][k];
        dmem[(AB >> 4) + 2 * k + 1][r*XLEN +: XLEN] = a[r + 4][k];
      end
      for (int j = 0; j < 4; j++) dmem[(BB >> 4) + k][j*XLEN +: XLEN] = b[k][j];
    end
    dmem[(TBL >> 4) + 0] = W'(entry(LOOP + 4, 0));
    dmem[(TBL >> 4) + 1] = W'(entry(LOOP + 7, 1));
    dmem[(TBL >> 4) + 2] = W'(entry(LOOP + 10, 2));
    dmem[(TBL >> 4) + 3] = W'(entry(LOOP + 13, 3));
  endtask

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%s: got %0d, expected %0d", what, got, exp);
    end
  endtask

  task automatic run(int nent, output int cycles);
    load_program(nent);
    rst_n = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    while (!halted) @(posedge clk);
    repeat (2) @(posedge clk);
    cycles = int'(perf.cycles);
    for (int j = 0; j < 4; j++)
      for (int r = 0; r < 8; r++)
        check($sformatf("C[%0d][%0d] with %0d entries", r, j, nent),
              int'(dut.u_rf.regs[16 + 2 * j + r / 4][(r % 4)*XLEN +: XLEN]), c[r][j]);
    check("squashed", int'(perf.squashed), 0);
    check("regions marked", int'(perf.regions_marked), 0);
    $display("%0d SASA entries: %0d cycles, %0d retired, %0d skipped, %0d stalls, %0d branches",
             nent, perf.cycles, perf.retired, perf.insts_skipped, perf.stalls, perf.branches_taken);
  endtask

  initial begin
    int cyc_skip, cyc_full;
    zeros = 0;
    for (int r = 0; r < 8; r++)
      for (int k = 0; k < K; k++) a[r][k] = int'($urandom % 201) - 100;
    for (int k = 0; k < K; k++)
      for (int j = 0; j < 4; j++) begin
        b[k][j] = ($urandom % 2 == 0) ? 0 : int'($urandom % 99) + 1;
        if (k == 0 && j == 0) b[k][j] = 0;
        if (k == 0 && j == 1) b[k][j] = 9;
        if (b[k][j] == 0) zeros++;
      end
    for (int r = 0; r < 8; r++)
      for (int j = 0; j < 4; j++) begin
        c[r][j] = 0;
        for (int k = 0; k < K; k++) c[r][j] += a[r][k] * b[k][j];
      end
    $display("B has %0d zeros of %0d", zeros, 4 * K);

    run(4, cyc_skip);
    check("skips on hit", int'(perf.hit_skips), zeros);
    check("instructions skipped", int'(perf.insts_skipped), 2 * zeros);
    check("SASA hits", int'(perf.sasa_hits), 4 * K);
    run(0, cyc_full);
    check("no table: skips", int'(perf.insts_skipped), 0);
    // loading 4 entries holds execute 4 cycles longer than SASA-LD #0
    check("cycles saved = 2 per zero - table load", cyc_full - cyc_skip, 2 * zeros - 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
