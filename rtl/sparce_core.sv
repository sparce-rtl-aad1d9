// sparce_core: in-order 4-stage core with sparsity-aware skipping (top).
//
// Stages: fetch (IF), decode (ID), execute/memory (EX), writeback (WB), with
// pipeline registers IF/ID, ID/EX and EX/WB. Beside the conventional
// pipeline sit the four extensions of the published design:
//   * SpRF (sprf)        - per register, isSparse per lane and regUpdInFlight;
//                          regUpdInFlight is set when decode issues a writer
//                          and cleared at its writeback (or squash).
//   * SVC (svc)          - zero check of every writeback result.
//   * SASA table         - associative table of skippable regions, loaded by
//     (sasa_table,         the SASA-LD instruction (sasa_loader) while it
//      sasa_loader)        holds the execute stage.
//   * PSRU (psru)        - in the fetch stage, in parallel with the
//                          instruction fetch, picks the next PC: skips a
//                          region whose condition is known true, or marks it
//                          skippable and later jumps to its end and squashes
//                          the region's instructions already in flight.
//
// Interfaces (the caches of the published platform are not part of this
// design; the core has plain memory ports answered in the same cycle):
//   imem_addr / imem_rdata : instruction fetch, byte address, 32-bit word
//   dmem_*                 : data port, byte address of a LANES*XLEN-bit row
//                            (aligned), combinational read, write at the edge
//   halted                 : a HALT instruction has written back
//   perf                   : event counters (see sparce_pkg::perf_t)
//
// Timing: one instruction per cycle when nothing stalls. The PSRU's next PC
// is used in the very next cycle, so a region skipped on a SASA hit costs no
// cycle at all. Decode stalls while any register it reads or writes has
// regUpdInFlight set (the SpRF doubles as the scoreboard, so at most one
// writer per register is in flight; the writeback result is bypassed through
// the register file so the dependent instruction issues in the producer's
// writeback cycle). Branches (BNE) are predicted not taken and resolved in EX;
// a taken branch flushes IF/ID and costs two cycles. Loads and stores finish
// in EX. SASA-LD holds EX for size*ROWS + 2 cycles.
//
// This design's own choices, where the published text is silent: the ISA and
// its encoding (sparce_pkg), integer lanes, the stall-based hazard handling,
// that the PSRU treats a register as in flight also while its writer is still
// in fetch or decode (the text sets regUpdInFlight "when it enters the decode
// stage"), that branches are never squashed by the PSRU (software does not
// place branches inside skippable regions), and that a store already in EX
// when its region is squashed is blocked from writing.
module sparce_core
  import sparce_pkg::*;
#(
  parameter int unsigned LANES     = 4,
  parameter int unsigned SASA_N    = SASA_ENTRIES,
  parameter logic [31:0] RESET_PC  = 32'h0,
  localparam int unsigned W        = LANES * XLEN
) (
  input  logic          clk,
  input  logic          rst_n,
  output pc_t           imem_addr,
  input  logic [31:0]   imem_rdata,
  output logic          dmem_req,
  output logic          dmem_we,
  output logic [31:0]   dmem_addr,
  output logic [W-1:0]  dmem_wdata,
  input  logic [W-1:0]  dmem_rdata,
  output logic          halted,
  output perf_t         perf
);

  localparam int unsigned TIDX_W = $clog2(SASA_N);

  // ---------------------------------------------------------------- state
  pc_t          pc_q;

  logic         ifid_v;
  pc_t          ifid_pc;
  logic [31:0]  ifid_ins;
  logic         ifid_rg;
  logic [1:0]   ifid_ep;

  logic         idex_v;
  pc_t          idex_pc;
  dec_t         idex_d;
  logic [W-1:0] idex_a, idex_b, idex_c;
  logic         idex_rg;
  logic [1:0]   idex_ep;

  logic         exwb_v;
  logic         exwb_writes;
  reg_idx_t     exwb_rd;
  logic [W-1:0] exwb_data;
  logic         exwb_halt;
  logic         exwb_sasa;
  logic         exwb_rg;
  logic [1:0]   exwb_ep;

  logic         halt_issued_q;
  logic         halted_q;

  // ---------------------------------------------------------------- SpRF / SVC
  logic [LANES-1:0] sp_sparse [NREG];
  logic [NREG-1:0]  sp_inflight;
  logic             upd_valid;
  reg_idx_t         upd_rd;
  logic [LANES-1:0] upd_sparse;
  logic             set_valid;
  reg_idx_t         set_rd;
  logic [NREG-1:0]  clr_mask;

  // ---------------------------------------------------------------- wires
  dec_t         id_d, if_d;
  logic         hazard, id_ready, issue, id_stall, ex_hold, fetch_fire, redirect;
  pc_t          redirect_pc;
  logic         wb_valid, wb_any;
  logic         sq_if, sq_ex, sq_wb;
  logic [W-1:0] rf_a, rf_b, rf_c;
  logic [W-1:0] alu_a, alu_b, alu_y, mac_y, ex_res, imm_vec;
  alu_op_e      alu_op;
  logic         alu_ne;
  logic [NREG-1:0] early_inflight;

  // SASA table / loader / PSRU
  logic              tbl_hit, tbl_clear, tbl_wr_en;
  sasa_entry_t       tbl_entry, tbl_wr_entry;
  logic [TIDX_W-1:0] tbl_wr_idx;
  logic              ld_start, ld_busy, ld_done, ld_req;
  logic [31:0]       ld_addr;
  pc_t               ps_next;
  logic              ps_kill, ps_in_rgn, ps_squash;
  logic [1:0]        ps_epoch;
  logic              ev_hit, ev_hit_skip, ev_mark, ev_rskip, ev_rexec;
  logic [PC_W-1:0]   ev_skipped;

  function automatic logic busy_reg(input reg_idx_t r, input logic [NREG-1:0] fl,
                                    input logic uv, input reg_idx_t ur);
    return fl[r] && !(uv && ur == r);
  endfunction

  // ---------------------------------------------------------------- decode
  // The writer in WB releases its register this cycle, by writing it back or
  // by being squashed; either way decode may use the register file's bypass.
  assign wb_any = exwb_v && exwb_writes;

  always_comb begin
    id_d   = decode(ifid_ins);
    hazard = (id_d.reads_rs1 && busy_reg(id_d.rs1, sp_inflight, wb_any, exwb_rd)) ||
             (id_d.reads_rs2 && busy_reg(id_d.rs2, sp_inflight, wb_any, exwb_rd)) ||
             ((id_d.reads_rd || id_d.writes_rd) && busy_reg(id_d.rd, sp_inflight, wb_any, exwb_rd));
  end

  assign ex_hold  = idex_v && (idex_d.op == OP_SASA_LD) && !ld_done;
  assign sq_if    = ps_squash && ifid_rg && (ifid_ep == ps_epoch);
  assign sq_ex    = ps_squash && idex_rg && (idex_ep == ps_epoch) && !ex_hold;
  assign sq_wb    = ps_squash && exwb_rg && (exwb_ep == ps_epoch);
  // id_stall does not depend on a squash, which keeps the PSRU (enabled by
  // fetch_fire) out of a combinational loop.
  assign id_ready = !hazard && !ex_hold && !halt_issued_q;
  assign issue    = ifid_v && id_ready && !redirect && !sq_if;
  assign id_stall = ifid_v && !id_ready && !redirect;

  // ---------------------------------------------------------------- fetch
  assign imem_addr  = pc_q;
  assign fetch_fire = !id_stall && !redirect && !halted_q;
  assign if_d       = decode(imem_rdata);

  always_comb begin
    early_inflight = sp_inflight;
    if (ifid_v && id_d.writes_rd) early_inflight[id_d.rd] = 1'b1;
    if (if_d.writes_rd)           early_inflight[if_d.rd] = 1'b1;
  end

  sasa_table #(.ENTRIES(SASA_N)) u_sasa (
    .clk, .rst_n,
    .clear    (tbl_clear),
    .wr_en    (tbl_wr_en),
    .wr_idx   (tbl_wr_idx),
    .wr_entry (tbl_wr_entry),
    .lookup_pc(pc_q),
    .hit      (tbl_hit),
    .hit_entry(tbl_entry)
  );

  psru #(.LANES(LANES)) u_psru (
    .clk, .rst_n,
    .fetch_valid   (fetch_fire),
    .pc            (pc_q),
    .hit           (tbl_hit),
    .hit_entry     (tbl_entry),
    .is_sparse     (sp_sparse),
    .in_flight     (early_inflight),
    .next_pc       (ps_next),
    .kill_fetch    (ps_kill),
    .in_region     (ps_in_rgn),
    .epoch         (ps_epoch),
    .squash        (ps_squash),
    .ev_hit        (ev_hit),
    .ev_hit_skip   (ev_hit_skip),
    .ev_mark       (ev_mark),
    .ev_region_skip(ev_rskip),
    .ev_region_exec(ev_rexec),
    .ev_skipped    (ev_skipped)
  );

  sprf #(.LANES(LANES)) u_sprf (
    .clk, .rst_n,
    .set_valid (set_valid),
    .set_rd    (set_rd),
    .upd_valid (upd_valid),
    .upd_rd    (upd_rd),
    .upd_sparse(upd_sparse),
    .clr_mask  (clr_mask),
    .is_sparse (sp_sparse),
    .in_flight (sp_inflight)
  );

  regfile #(.LANES(LANES)) u_rf (
    .clk, .rst_n,
    .ra(id_d.rs1), .rb(id_d.rs2), .rc(id_d.rd),
    .da(rf_a), .db(rf_b), .dc(rf_c),
    .we(wb_valid && exwb_writes), .wa(exwb_rd), .wd(exwb_data)
  );

  assign set_valid = issue && id_d.writes_rd;
  assign set_rd    = id_d.rd;

  // ---------------------------------------------------------------- execute
  always_comb begin
    imm_vec = {LANES{idex_d.imm}};
    alu_op  = (idex_d.op == OP_SUB) ? ALU_SUB : ALU_ADD;
    alu_a   = idex_a;
    alu_b   = idex_b;
    case (idex_d.op)
      OP_ADDI: alu_b = imm_vec;
      OP_BNE:  begin alu_a = idex_c; alu_b = idex_a; end
      default: ;
    endcase
  end

  alu #(.LANES(LANES)) u_alu (.op(alu_op), .a(alu_a), .b(alu_b), .y(alu_y), .ne(alu_ne));

  mac_unit #(.LANES(LANES)) u_mac (
    .mode(idex_d.op == OP_MAC), .sel(idex_d.lane),
    .acc(idex_c), .a(idex_a), .b(idex_b), .y(mac_y)
  );

  assign redirect    = idex_v && (idex_d.op == OP_BNE) && alu_ne;
  assign redirect_pc = idex_pc + (idex_d.imm << 2);

  assign ld_start = idex_v && (idex_d.op == OP_SASA_LD);

  sasa_loader #(.DATA_W(W), .ENTRIES(SASA_N)) u_loader (
    .clk, .rst_n,
    .start       (ld_start),
    .base        (idex_a[31:0]),
    .size        (idex_d.imm[15:0]),
    .busy        (ld_busy),
    .done        (ld_done),
    .rd_req      (ld_req),
    .rd_addr     (ld_addr),
    .rd_data     (dmem_rdata),
    .tbl_clear   (tbl_clear),
    .tbl_wr_en   (tbl_wr_en),
    .tbl_wr_idx  (tbl_wr_idx),
    .tbl_wr_entry(tbl_wr_entry)
  );

  always_comb begin
    dmem_req   = ld_req || (idex_v && (idex_d.op == OP_LD || idex_d.op == OP_ST));
    dmem_we    = idex_v && (idex_d.op == OP_ST) && !sq_ex;
    dmem_addr  = ld_busy ? ld_addr : (idex_a[31:0] + idex_d.imm);
    dmem_wdata = idex_c;
    case (idex_d.op)
      OP_MUL, OP_MAC: ex_res = mac_y;
      OP_LD:          ex_res = dmem_rdata;
      default:        ex_res = alu_y;
    endcase
  end

  // ---------------------------------------------------------------- writeback
  assign wb_valid = exwb_v && !sq_wb;

  svc #(.LANES(LANES)) u_svc (
    .wb_valid  (wb_valid),
    .wb_writes (exwb_writes),
    .wb_rd     (exwb_rd),
    .wb_data   (exwb_data),
    .upd_valid (upd_valid),
    .upd_rd    (upd_rd),
    .upd_sparse(upd_sparse)
  );

  always_comb begin
    clr_mask = '0;
    if (sq_ex && idex_v && idex_d.writes_rd) clr_mask[idex_d.rd] = 1'b1;
    if (sq_wb && exwb_v && exwb_writes)      clr_mask[exwb_rd]   = 1'b1;
  end

  // ---------------------------------------------------------------- registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc_q          <= RESET_PC;
      ifid_v        <= 1'b0;
      ifid_pc       <= '0;
      ifid_ins      <= '0;
      ifid_rg       <= 1'b0;
      ifid_ep       <= '0;
      idex_v        <= 1'b0;
      idex_pc       <= '0;
      idex_d        <= '0;
      idex_a        <= '0;
      idex_b        <= '0;
      idex_c        <= '0;
      idex_rg       <= 1'b0;
      idex_ep       <= '0;
      exwb_v        <= 1'b0;
      exwb_writes   <= 1'b0;
      exwb_rd       <= '0;
      exwb_data     <= '0;
      exwb_halt     <= 1'b0;
      exwb_sasa     <= 1'b0;
      exwb_rg       <= 1'b0;
      exwb_ep       <= '0;
      halt_issued_q <= 1'b0;
      halted_q      <= 1'b0;
    end else begin
      // IF -> IF/ID
      if (redirect) begin
        pc_q   <= redirect_pc;
        ifid_v <= 1'b0;
      end else if (fetch_fire) begin
        pc_q     <= ps_next;
        ifid_v   <= !ps_kill;
        ifid_pc  <= pc_q;
        ifid_ins <= imem_rdata;
        ifid_rg  <= ps_in_rgn;
        ifid_ep  <= ps_epoch;
      end else if (issue || sq_if) begin
        ifid_v <= 1'b0;
      end

      // ID -> ID/EX
      if (issue) begin
        idex_v  <= 1'b1;
        idex_pc <= ifid_pc;
        idex_d  <= id_d;
        idex_a  <= rf_a;
        idex_b  <= rf_b;
        idex_c  <= rf_c;
        idex_rg <= ifid_rg;
        idex_ep <= ifid_ep;
        if (id_d.op == OP_HALT) halt_issued_q <= 1'b1;
      end else if (!ex_hold) begin
        idex_v <= 1'b0;
      end

      // EX -> EX/WB
      exwb_v      <= idex_v && !ex_hold && !sq_ex;
      exwb_writes <= idex_d.writes_rd;
      exwb_rd     <= idex_d.rd;
      exwb_data   <= ex_res;
      exwb_halt   <= idex_d.op == OP_HALT;
      exwb_sasa   <= idex_d.op == OP_SASA_LD;
      exwb_rg     <= idex_rg;
      exwb_ep     <= idex_ep;

      if (wb_valid && exwb_halt) halted_q <= 1'b1;
    end
  end

  assign halted = halted_q;

  // ---------------------------------------------------------------- counters
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      perf <= '0;
    end else if (!halted_q) begin
      perf.cycles         <= perf.cycles + 1'b1;
      perf.retired        <= perf.retired        + CNT_W'(wb_valid);
      perf.sasa_hits      <= perf.sasa_hits      + CNT_W'(ev_hit);
      perf.hit_skips      <= perf.hit_skips      + CNT_W'(ev_hit_skip);
      perf.regions_marked <= perf.regions_marked + CNT_W'(ev_mark);
      perf.region_skips   <= perf.region_skips   + CNT_W'(ev_rskip);
      perf.region_execs   <= perf.region_execs   + CNT_W'(ev_rexec);
      perf.insts_skipped  <= perf.insts_skipped  + CNT_W'(ev_skipped);
      perf.squashed       <= perf.squashed       + CNT_W'(sq_if && ifid_v)
                                                 + CNT_W'(sq_ex && idex_v)
                                                 + CNT_W'(sq_wb && exwb_v);
      perf.stalls         <= perf.stalls         + CNT_W'(id_stall);
      perf.branches_taken <= perf.branches_taken + CNT_W'(redirect);
      perf.sasa_loads     <= perf.sasa_loads     + CNT_W'(wb_valid && exwb_sasa);
    end
  end

  // ---------------------------------------------------------------- checks
  // The SASA-LD sequencer owns the data port while it runs.
  a_loader_owns_port: assert property (@(posedge clk) disable iff (!rst_n)
    ld_busy |-> !dmem_we);
  // A register is written back only by the instruction that marked it in flight.
  a_wb_in_flight: assert property (@(posedge clk) disable iff (!rst_n)
    (wb_valid && exwb_writes) |-> sp_inflight[exwb_rd]);
  // Decode never issues a writer of a register that already has one in flight.
  a_one_writer: assert property (@(posedge clk) disable iff (!rst_n)
    set_valid |-> !busy_reg(set_rd, sp_inflight, wb_any, exwb_rd));

endmodule
