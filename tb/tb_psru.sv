// tb_psru: self-checking test of the Pre-identify and Skip Redundancy Unit.
// Directed cases covering every branch of the skip flowchart, with expected
// next PCs worked out by hand:
//   * SASA hit, condition known true / false (the OR, AND and single forms of
//     the block diagram's example entries 4067, 4100, 4250);
//   * the lane form of the worked example: preceding PC 0x4086, 2 instructions,
//     SpRF[12][1] with isSparse[12] = 0110 -> next PC 0x4086 + 3*4;
//   * the whole-register form (all lanes must be zero);
//   * hit with a condition register in flight -> region marked; inside the
//     region still pending -> PC+4; then resolved true -> jump to region end,
//     kill and squash; resolved false -> region executed;
//   * fetch leaving a marked region forgets it; no state change when
//     fetch_valid is low.
module tb_psru;
  import sparce_pkg::*;
  localparam int LANES = 4;
  logic clk = 0, rst_n = 0;
  logic fetch_valid, hit, kill_fetch, in_region, squash;
  logic ev_hit, ev_hit_skip, ev_mark, ev_region_skip, ev_region_exec;
  logic [PC_W-1:0] ev_skipped;
  pc_t pc, next_pc;
  sasa_entry_t hit_entry;
  logic [LANES-1:0] is_sparse [NREG];
  logic [NREG-1:0] in_flight;
  logic [1:0] epoch;
  int checks = 0, failures = 0;

  psru #(.LANES(LANES)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic sasa_entry_t ent(int p, int n, cond_op_e op, sp_sel_t a, sp_sel_t b);
    return '{pc: pc_t'(p), skip: SKIP_W'(n), cond: '{op: op, a: a, b: b}};
  endfunction

  // Present one fetch; check the combinational answer; then clock it in.
  task automatic step(pc_t p, logic h, sasa_entry_t e, pc_t exp_next, logic exp_kill,
                      logic exp_squash, logic exp_in_rgn, string what);
    @(negedge clk);
    fetch_valid = 1; pc = p; hit = h; hit_entry = e;
    #1;
    checks++;
    if (next_pc !== exp_next || kill_fetch !== exp_kill || squash !== exp_squash || in_region !== exp_in_rgn) begin
      failures++;
      $display("%s: next %h (exp %h) kill %b (%b) squash %b (%b) in_region %b (%b)", what,
               next_pc, exp_next, kill_fetch, exp_kill, squash, exp_squash, in_region, exp_in_rgn);
    end
    @(posedge clk); #1;
  endtask

  sasa_entry_t e_or, e_and, e_one, e_lane, e_whole, none;

  initial begin
    fetch_valid = 0; pc = 0; hit = 0; hit_entry = '0; in_flight = '0;
    for (int r = 0; r < NREG; r++) is_sparse[r] = '0;
    none   = '0;
    e_or   = ent(4067, 2, COND_OR,     sel_reg(1), sel_reg(2));
    e_and  = ent(4100, 5, COND_AND,    sel_reg(3), sel_reg(4));
    e_one  = ent(4250, 2, COND_SINGLE, sel_reg(3), sel_reg(0));
    e_lane = ent('h4086, 2, COND_SINGLE, sel_lane(12, 1), sel_reg(0));
    e_whole= ent('h5000, 3, COND_SINGLE, sel_reg(12), sel_reg(0));
    repeat (2) @(posedge clk);
    rst_n = 1;

    // block diagram example SpRF: Rs1 sparse, Rs2 not
    is_sparse[1] = '1; is_sparse[2] = '0; is_sparse[3] = '1; is_sparse[4] = '0;
    step(4067, 1, e_or,  4067 + 12, 0, 0, 0, "OR true");
    step(4100, 1, e_and, 4104,      0, 0, 0, "AND false");
    is_sparse[4] = '1;
    step(4100, 1, e_and, 4100 + 24, 0, 0, 0, "AND true");
    step(4250, 1, e_one, 4250 + 12, 0, 0, 0, "single true");
    is_sparse[1] = '0;
    step(4067, 1, e_or,  4071,      0, 0, 0, "OR false");
    // worked example: isSparse[12] = 0110, lane 1 is zero
    is_sparse[12] = 4'b0110;
    step('h4086, 1, e_lane, 'h4086 + 12, 0, 0, 0, "lane 1 of v12");
    step('h5000, 1, e_whole, 'h5004, 0, 0, 0, "whole v12 not zero");
    is_sparse[12] = 4'b1111;
    step('h5000, 1, e_whole, 'h5000 + 16, 0, 0, 0, "whole v12 zero");
    checks++;
    if (dut.rg_valid) begin failures++; $display("region marked without an in-flight register"); end

    // pending condition: mark a region, resolve it true
    is_sparse[12] = 4'b0000; in_flight[12] = 1;
    step('h5000, 1, e_whole, 'h5004, 0, 0, 0, "mark");
    checks++;
    if (!dut.rg_valid || dut.rg_start != 'h5004 || dut.rg_end != 'h5010) begin failures++; $display("region not marked"); end
    step('h5004, 0, none, 'h5008, 0, 0, 1, "in region, pending");
    // no state change while fetch is not valid
    @(negedge clk); fetch_valid = 0; pc = 'h5008; in_flight[12] = 0; is_sparse[12] = '1; #1;
    checks++;
    if (squash || kill_fetch || ev_region_skip) begin failures++; $display("acted without fetch_valid"); end
    @(posedge clk);
    step('h5008, 0, none, 'h5010, 1, 1, 1, "resolved true");
    checks++;
    if (dut.rg_valid) begin failures++; $display("region not cleared after skip"); end

    // mark and resolve false
    in_flight[12] = 1; is_sparse[12] = '0;
    step('h5000, 1, e_whole, 'h5004, 0, 0, 0, "mark 2");
    in_flight[12] = 0;
    step('h5004, 0, none, 'h5008, 0, 0, 1, "resolved false");
    step('h5008, 0, none, 'h500c, 0, 0, 0, "region forgotten");

    // mark, then fetch leaves the region (branch away)
    in_flight[12] = 1;
    step('h5000, 1, e_whole, 'h5004, 0, 0, 0, "mark 3");
    step('h6000, 0, none, 'h6004, 0, 0, 0, "outside region");
    in_flight[12] = 0; is_sparse[12] = '1;
    step('h5004, 0, none, 'h5008, 0, 0, 0, "old region gone");

    // an OR condition with one operand in flight is pending
    in_flight[2] = 1; is_sparse[1] = '1;
    step(4067, 1, e_or, 4071, 0, 0, 0, "OR pending");
    checks++;
    if (!dut.rg_valid) begin failures++; $display("OR pending did not mark"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
