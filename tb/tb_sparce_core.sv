// tb_sparce_core: end-to-end test of the sparsity-aware core at its default
// parameters (4 lanes of 32 bits, 32 registers, 20-entry SASA table).
//
// The program is the vector dot product used to motivate the design
// (OUT += INP[i] * KER[i], i < 16, INP about half zeros), followed by two
// straight-line probes of a 4-instruction skippable region, one guarded by a
// register that turns out zero and one by a register that turns out nonzero.
// SASA-LD loads four entries:
//   A: after the NOP before "LD r1 (KER)"      skip 1 if r0 (INP) lane 0 is zero
//   B: after "ADDI p1"                         skip 2 (MUL, ADD) if r0 | r1
//   C/D: after the instruction following each probe load: skip 4 if r5 is zero
// Because the INP load is only three instructions ahead of A, A is always
// marked as a skippable region and resolved one fetch later; B then sees r0
// settled and skips at once. Probe C resolves while two region instructions
// are in flight, so they are squashed; probe D is found not redundant.
//
// The program runs twice from reset: with the four entries, and with
// SASA-LD #0 (no skipping). Checked: the stored dot product and the probe
// registers against values computed here, the event counters against counts
// derived from the number of zeros, that the skipping run is faster, that
// the instruction after a skip is fetched in the very next cycle, and that
// every mechanism (hit skip, region mark, region skip, region executed,
// squash, decode stall, taken branch, SASA-LD) happened at least once.
module tb_sparce_core;
  import sparce_pkg::*;
  localparam int LANES = 4;
  localparam int W = LANES * XLEN;
  localparam int N = 16;
  localparam int INP = 'h100, KER = 'h200, OUT = 'h300, ZRO = 'h310, NZR = 'h320, TBL = 'h400;

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
  int inp [N], ker [N];
  int zeros, exp_dot, out0;
  int cycles_skip, cycles_noskip;
  int seen [string];

  sparce_core dut (.*);

  always #5 clk = ~clk;
  assign imem_rdata = imem[imem_addr[7:2]];
  assign dmem_rdata = dmem[dmem_addr[11:4]];
  always @(posedge clk) if (dmem_we) dmem[dmem_addr[11:4]] <= dmem_wdata;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // A region skipped on a SASA hit costs no cycle: the next fetch is the
  // first instruction after the region.
  pc_t skip_target;
  logic skip_pending = 0;
  always @(posedge clk) begin
    if (rst_n && skip_pending) begin
      checks++;
      if (imem_addr !== skip_target) begin
        failures++;
        $display("fetch after skip at %h, expected %h", imem_addr, skip_target);
      end
    end
    skip_pending <= rst_n && dut.ev_hit_skip && dut.fetch_fire && !dut.redirect;
    skip_target  <= dut.ps_next;
  end

  function automatic logic [63:0] entry(int p, int n, cond_op_e op, sp_sel_t a, sp_sel_t b);
    sasa_entry_t e;
    e = '{pc: pc_t'(p), skip: SKIP_W'(n), cond: '{op: op, a: a, b: b}};
    return 64'(e);
  endfunction

  task automatic load_program(int nent);
    int i;
    for (i = 0; i < 64; i++) imem[i] = enc_i(OP_HALT, 0, 0, 0);
    imem[0]  = enc_i(OP_ADDI, 12, 20, OUT);
    imem[1]  = enc_i(OP_ADDI, 10, 20, INP);
    imem[2]  = enc_i(OP_ADDI, 11, 20, KER);
    imem[3]  = enc_i(OP_ADDI, 14, 20, N);
    imem[4]  = enc_i(OP_ADDI, 15, 20, TBL);
    imem[5]  = enc_i(OP_SASA_LD, 0, 15, nent);
    imem[6]  = enc_i(OP_LD, 2, 12, 0);          // r2 = OUT
    imem[7]  = enc_i(OP_LD, 0, 10, 0);          // LOOP: r0 = INP[i]
    imem[8]  = enc_i(OP_ADDI, 10, 10, 16);
    imem[9]  = enc_i(OP_ADDI, 13, 13, 1);       // index++
    imem[10] = enc_i(OP_NOP, 0, 0, 0);          // entry A
    imem[11] = enc_i(OP_LD, 1, 11, 0);          // r1 = KER[i]
    imem[12] = enc_i(OP_ADDI, 11, 11, 16);      // entry B
    imem[13] = enc_r(OP_MUL, 3, 1, 0);          // r3 = r1 * r0
    imem[14] = enc_r(OP_ADD, 2, 2, 3);          // r2 += r3
    imem[15] = enc_i(OP_BNE, 13, 14, -8);       // loop while index != N
    imem[16] = enc_i(OP_ST, 2, 12, 0);
    imem[17] = enc_i(OP_ADDI, 16, 20, ZRO);
    imem[18] = enc_i(OP_NOP, 0, 0, 0);
    imem[19] = enc_i(OP_NOP, 0, 0, 0);
    imem[20] = enc_i(OP_LD, 5, 16, 0);          // r5 = 0
    imem[21] = enc_i(OP_ADDI, 6, 6, 1);         // entry C
    imem[22] = enc_i(OP_ADDI, 7, 7, 1);
    imem[23] = enc_i(OP_ADDI, 8, 8, 1);
    imem[24] = enc_i(OP_ADDI, 9, 9, 1);
    imem[25] = enc_i(OP_ADDI, 9, 9, 1);
    imem[26] = enc_i(OP_ADDI, 16, 20, NZR);
    imem[27] = enc_i(OP_NOP, 0, 0, 0);
    imem[28] = enc_i(OP_NOP, 0, 0, 0);
    imem[29] = enc_i(OP_LD, 5, 16, 0);          // r5 != 0
    imem[30] = enc_i(OP_ADDI, 6, 6, 1);         // entry D
    for (i = 31; i < 35; i++) imem[i] = imem[i - 9];
    imem[35] = enc_i(OP_HALT, 0, 0, 0);

    for (i = 0; i < 256; i++) dmem[i] = '0;
    for (i = 0; i < N; i++) begin
      dmem[(INP >> 4) + i] = W'(inp[i]);
      dmem[(KER >> 4) + i] = W'(ker[i]);
    end
    dmem[OUT >> 4] = W'(out0);
    dmem[NZR >> 4] = {LANES{32'd7}};
    dmem[(TBL >> 4) + 0] = W'(entry(10 * 4, 1, COND_SINGLE, sel_lane(0, 0), sel_reg(0)));
    dmem[(TBL >> 4) + 1] = W'(entry(12 * 4, 2, COND_OR,     sel_lane(0, 0), sel_lane(1, 0)));
    dmem[(TBL >> 4) + 2] = W'(entry(21 * 4, 4, COND_SINGLE, sel_reg(5),     sel_reg(0)));
    dmem[(TBL >> 4) + 3] = W'(entry(30 * 4, 4, COND_SINGLE, sel_reg(5),     sel_reg(0)));
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
    $display("run with %0d SASA entries: %0d cycles, %0d retired, %0d skipped, %0d squashed",
             nent, perf.cycles, perf.retired, perf.insts_skipped, perf.squashed);
    check("dot product lane 0", int'(dmem[OUT >> 4][31:0]), exp_dot);
    check("dot product lanes 1..3 stay zero", int'(dmem[OUT >> 4][W-1:32] != '0), 0);
    check("r6", int'(dut.u_rf.regs[6][31:0]), 2);
    check("sasa loads", int'(perf.sasa_loads), 1);
    check("taken branches", int'(perf.branches_taken), N - 1);
    if (perf.stalls > 0)         seen["decode stall"]++;
    if (perf.branches_taken > 0) seen["taken branch"]++;
    if (perf.sasa_loads > 0)     seen["SASA-LD"]++;
  endtask

  initial begin
    int c;
    zeros = 0; exp_dot = 0;
    out0 = 5;
    for (int i = 0; i < N; i++) begin
      inp[i] = ($urandom % 2 == 0) ? 0 : 1 + $urandom % 1000;
      ker[i] = ($urandom % 5 == 0) ? 0 : 1 + $urandom % 1000;
      if (i == 0) inp[i] = 0;
      if (i == 1 && inp[1] == 0) inp[1] = 3;
      if (inp[i] == 0) zeros++;
      exp_dot += inp[i] * ker[i];
    end
    exp_dot += out0;
    $display("INP has %0d zeros of %0d", zeros, N);

    run(4, c);
    cycles_skip = c;
    check("probe C skipped (r7)", int'(dut.u_rf.regs[7][31:0]), 1);
    check("probe C skipped (r8)", int'(dut.u_rf.regs[8][31:0]), 1);
    check("probe C skipped (r9)", int'(dut.u_rf.regs[9][31:0]), 2);
    check("SASA hits", int'(perf.sasa_hits), 2 * N + 2);
    check("skips on hit", int'(perf.hit_skips), zeros);
    check("regions marked", int'(perf.regions_marked), N + (N - zeros) + 2);
    check("regions skipped", int'(perf.region_skips), zeros + 1);
    check("regions executed", int'(perf.region_execs), (N - zeros) + 1);
    check("instructions squashed", int'(perf.squashed), 2);
    check("instructions skipped", int'(perf.insts_skipped), 3 * zeros + 2);
    check("retired = executed path", int'(perf.retired), 7 + N * 9 - 3 * zeros + 4 + 15 - 4 + 1);
    if (perf.hit_skips > 0)      seen["skip on SASA hit"]++;
    if (perf.regions_marked > 0) seen["skippable region marked"]++;
    if (perf.region_skips > 0)   seen["skippable region skipped"]++;
    if (perf.region_execs > 0)   seen["skippable region executed"]++;
    if (perf.squashed > 0)       seen["squash"]++;

    run(0, c);
    cycles_noskip = c;
    check("no skipping: r7", int'(dut.u_rf.regs[7][31:0]), 2);
    check("no skipping: r9", int'(dut.u_rf.regs[9][31:0]), 4);
    check("no skipping: SASA hits", int'(perf.sasa_hits), 0);
    check("skipping run is faster", int'(cycles_skip < cycles_noskip), 1);
    $display("cycles: %0d with skipping, %0d without", cycles_skip, cycles_noskip);

    foreach (seen[k]) $display("mechanism %-28s happened in %0d run(s)", k, seen[k]);
    begin
      string need [8] = '{"skip on SASA hit", "skippable region marked", "skippable region skipped",
                          "skippable region executed", "squash", "decode stall", "taken branch", "SASA-LD"};
      foreach (need[i]) begin
        checks++;
        if (!seen.exists(need[i])) begin
          failures++;
          $display("mechanism never happened: %s", need[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
