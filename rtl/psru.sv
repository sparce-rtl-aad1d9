// psru: Pre-identify and Skip Redundancy Unit.
//
// Sits in the fetch stage beside the instruction fetch and decides, for the
// instruction being fetched at 'pc', which instruction is fetched next. It
// follows the published flowchart:
//
//   SASA hit at pc (pc is the instruction before a candidate region):
//     - condition registers not in flight, condition true:
//         next = pc + 4*(1 + instsToSkip)       (region never fetched)
//     - condition registers not in flight, condition false: next = pc + 4
//     - a condition register in flight: remember [pc+4, pc+4+4*instsToSkip)
//       as the active "skippable region" with its condition; next = pc + 4
//   no hit, pc inside the active skippable region:
//     - condition still pending: next = pc + 4
//     - condition now true: next = region end; the instruction at pc is
//       dropped (kill_fetch) and the region's instructions already in the
//       pipeline are squashed (squash)
//     - condition now false: the region is executed; it is forgotten
//   otherwise: next = pc + 4 (and an active region the PC has left is
//   forgotten).
//
// A condition is evaluated from isSparse of its one or two operands, each a
// single lane bit or "all lanes" of a register, combined by single/OR/AND.
// It is pending when an operand register has regUpdInFlight set ('in_flight'
// here also carries writers still in fetch/decode, see the core).
//
// This design's choices: one skippable region is tracked at a time (a newer
// marked region replaces it); fetched instructions of the region are tagged
// with 'in_region' and a 2-bit region epoch, and a squash removes only tagged
// instructions of the current epoch. State changes only in cycles where
// fetch_valid is high (the fetch really advances on the correct path).
// Combinational outputs; the region registers update at the clock edge.
module psru
  import sparce_pkg::*;
#(
  parameter int unsigned LANES = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              fetch_valid,
  input  pc_t               pc,
  input  logic              hit,
  input  sasa_entry_t       hit_entry,
  input  logic [LANES-1:0]  is_sparse [NREG],
  input  logic [NREG-1:0]   in_flight,
  output pc_t               next_pc,
  output logic              kill_fetch,   // drop the instruction fetched at pc
  output logic              in_region,    // fetched instruction belongs to the region
  output logic [1:0]        epoch,        // epoch of the active region
  output logic              squash,       // squash tagged instructions of 'epoch'
  // events of this cycle (qualified by fetch_valid)
  output logic              ev_hit,
  output logic              ev_hit_skip,
  output logic              ev_mark,
  output logic              ev_region_skip,
  output logic              ev_region_exec,
  output logic [PC_W-1:0]   ev_skipped    // instructions skipped this cycle
);

  logic        rg_valid;
  pc_t         rg_start, rg_end;
  sprf_cond_t  rg_cond;
  logic [1:0]  rg_epoch;

  logic        hit_pend, hit_true, rg_pend, rg_true, in_rgn;
  logic        do_mark, do_clear;
  pc_t         pc4, skip_bytes;

  function automatic logic sel_sparse(input sp_sel_t s, input logic [LANES-1:0] sp [NREG]);
    logic v;
    v = 1'b0;
    if (s.whole) v = &sp[s.idx];
    else
      for (int l = 0; l < LANES; l++)
        if (3'(l) == s.lane) v = sp[s.idx][l];  // a lane beyond LANES never matches
    return v;
  endfunction

  function automatic logic cond_true(input sprf_cond_t c, input logic [LANES-1:0] sp [NREG]);
    logic a, b, v;
    a = sel_sparse(c.a, sp);
    b = sel_sparse(c.b, sp);
    case (c.op)
      COND_SINGLE: v = a;
      COND_OR:     v = a | b;
      COND_AND:    v = a & b;
      default:     v = 1'b0;
    endcase
    return v;
  endfunction

  function automatic logic cond_pending(input sprf_cond_t c, input logic [NREG-1:0] fl);
    logic v;
    case (c.op)
      COND_SINGLE:       v = fl[c.a.idx];
      COND_OR, COND_AND: v = fl[c.a.idx] | fl[c.b.idx];
      default:           v = 1'b0;
    endcase
    return v;
  endfunction

  always_comb begin
    pc4        = pc + pc_t'(INSTR_BYTES);
    skip_bytes = pc_t'(hit_entry.skip) * pc_t'(INSTR_BYTES);
    hit_pend   = cond_pending(hit_entry.cond, in_flight);
    hit_true   = cond_true(hit_entry.cond, is_sparse);
    rg_pend    = cond_pending(rg_cond, in_flight);
    rg_true    = cond_true(rg_cond, is_sparse);
    in_rgn     = rg_valid && (pc >= rg_start) && (pc < rg_end);

    next_pc        = pc4;
    kill_fetch     = 1'b0;
    squash         = 1'b0;
    do_mark        = 1'b0;
    do_clear       = 1'b0;
    ev_hit_skip    = 1'b0;
    ev_region_skip = 1'b0;
    ev_region_exec = 1'b0;
    ev_skipped     = '0;

    if (hit) begin
      if (hit_pend) begin
        do_mark = 1'b1;
      end else if (hit_true) begin
        next_pc     = pc4 + skip_bytes;
        ev_hit_skip = 1'b1;
        ev_skipped  = PC_W'(hit_entry.skip);
      end
    end else if (in_rgn) begin
      if (!rg_pend) begin
        do_clear = 1'b1;
        if (rg_true) begin
          next_pc        = rg_end;
          kill_fetch     = 1'b1;
          squash         = 1'b1;
          ev_region_skip = 1'b1;
          ev_skipped     = (rg_end - pc) / pc_t'(INSTR_BYTES);
        end else begin
          ev_region_exec = 1'b1;
        end
      end
    end else if (rg_valid) begin
      do_clear = 1'b1;  // fetch has left the region
    end

    ev_hit    = hit;
    ev_mark   = do_mark;
    in_region = !hit && in_rgn;
    epoch     = rg_epoch;

    if (!fetch_valid) begin
      kill_fetch     = 1'b0;
      squash         = 1'b0;
      ev_hit         = 1'b0;
      ev_hit_skip    = 1'b0;
      ev_mark        = 1'b0;
      ev_region_skip = 1'b0;
      ev_region_exec = 1'b0;
      ev_skipped     = '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rg_valid <= 1'b0;
      rg_start <= '0;
      rg_end   <= '0;
      rg_cond  <= '0;
      rg_epoch <= '0;
    end else if (fetch_valid) begin
      if (do_mark) begin
        rg_valid <= 1'b1;
        rg_start <= pc4;
        rg_end   <= pc4 + skip_bytes;
        rg_cond  <= hit_entry.cond;
        rg_epoch <= rg_epoch + 1'b1;
      end else if (do_clear) begin
        rg_valid <= 1'b0;
      end
    end
  end

endmodule
