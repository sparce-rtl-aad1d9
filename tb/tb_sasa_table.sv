// tb_sasa_table: self-checking test of the SASA table.
// Loads the three example entries of the published block diagram (preceding
// PCs 4067, 4100, 4250) plus random ones into a 20-entry table, then looks up
// random and stored PCs and compares hit and returned entry with a reference
// search done in the testbench (lowest index wins on duplicates). Also checks
// that 'clear' empties the table and that reset leaves it empty.
module tb_sasa_table;
  import sparce_pkg::*;
  localparam int N = 20;
  logic clk = 0, rst_n = 0;
  logic clear, wr_en, hit;
  logic [$clog2(N)-1:0] wr_idx;
  sasa_entry_t wr_entry, hit_entry, m_e [N];
  logic [N-1:0] m_v;
  pc_t lookup_pc;
  int checks = 0, failures = 0;

  sasa_table #(.ENTRIES(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write(int idx, sasa_entry_t e);
    @(negedge clk);
    wr_en = 1; wr_idx = idx[$clog2(N)-1:0]; wr_entry = e;
    @(posedge clk); #1 wr_en = 0;
    m_e[idx] = e; m_v[idx] = 1'b1;
  endtask

  task automatic probe(pc_t pc);
    logic eh; sasa_entry_t ee;
    @(negedge clk);
    lookup_pc = pc;
    eh = 0; ee = '0;
    for (int e = 0; e < N; e++) if (!eh && m_v[e] && m_e[e].pc == pc) begin eh = 1; ee = m_e[e]; end
    #1;
    checks++;
    if (hit !== eh || (eh && hit_entry !== ee)) begin
      failures++;
      $display("lookup %0d: hit %b exp %b entry %h exp %h", pc, hit, eh, hit_entry, ee);
    end
  endtask

  initial begin
    clear = 0; wr_en = 0; wr_idx = 0; wr_entry = '0; lookup_pc = 0; m_v = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    probe(0); probe(4067);
    write(0, '{pc: 4067, skip: 2, cond: '{op: COND_OR,     a: sel_reg(1), b: sel_reg(2)}});
    write(1, '{pc: 4100, skip: 5, cond: '{op: COND_AND,    a: sel_reg(3), b: sel_reg(4)}});
    write(2, '{pc: 4250, skip: 2, cond: '{op: COND_SINGLE, a: sel_reg(3), b: sel_reg(0)}});
    probe(4067); probe(4100); probe(4250); probe(4251);
    for (int i = 3; i < N; i++)
      write(i, '{pc: pc_t'(($urandom % 64) * 4), skip: SKIP_W'($urandom), cond: sprf_cond_t'($urandom)});
    write(N - 1, '{pc: 4100, skip: 9, cond: '0});  // duplicate PC: entry 1 must win
    for (int i = 0; i < 200; i++) probe(pc_t'(($urandom % 70) * 4));
    probe(4067); probe(4100); probe(4250);
    @(negedge clk); clear = 1; @(posedge clk); #1 clear = 0; m_v = '0;
    probe(4067); probe(4100);
    for (int i = 0; i < 50; i++) probe(pc_t'(($urandom % 70) * 4));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
