// tb_sprf: self-checking test of the Sparsity Register File.
// Drives random decode sets, writeback updates and squash clears for 600
// cycles and compares both fields of every entry with a reference model kept
// in the testbench after each clock edge. Also checks the reset state.
module tb_sprf;
  import sparce_pkg::*;
  localparam int LANES = 4;
  logic clk = 0, rst_n = 0;
  logic set_valid, upd_valid;
  reg_idx_t set_rd, upd_rd;
  logic [LANES-1:0] upd_sparse;
  logic [NREG-1:0] clr_mask;
  logic [LANES-1:0] is_sparse [NREG];
  logic [NREG-1:0] in_flight;
  logic [LANES-1:0] m_sp [NREG];
  logic [NREG-1:0] m_fl;
  int checks = 0, failures = 0;

  sprf #(.LANES(LANES)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    for (int r = 0; r < NREG; r++) begin
      checks++;
      if (is_sparse[r] !== m_sp[r] || in_flight[r] !== m_fl[r]) begin
        failures++;
        if (failures < 10) $display("mismatch r%0d sp=%b/%b fl=%b/%b", r, is_sparse[r], m_sp[r], in_flight[r], m_fl[r]);
      end
    end
  endtask

  initial begin
    set_valid = 0; upd_valid = 0; set_rd = 0; upd_rd = 0; upd_sparse = 0; clr_mask = 0;
    for (int r = 0; r < NREG; r++) m_sp[r] = '1;
    m_fl = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1 compare();
    for (int c = 0; c < 600; c++) begin
      @(negedge clk);
      set_valid  = ($urandom % 2) == 0;
      set_rd     = reg_idx_t'($urandom);
      upd_valid  = ($urandom % 2) == 0;
      upd_rd     = reg_idx_t'($urandom % 8);   // collide often with set_rd
      upd_sparse = LANES'($urandom);
      clr_mask   = (($urandom % 4) == 0) ? NREG'($urandom) : '0;
      // reference model of the next state
      for (int r = 0; r < NREG; r++) begin
        if (upd_valid && upd_rd == reg_idx_t'(r)) m_sp[r] = upd_sparse;
        if (set_valid && set_rd == reg_idx_t'(r)) m_fl[r] = 1'b1;
        else if ((upd_valid && upd_rd == reg_idx_t'(r)) || clr_mask[r]) m_fl[r] = 1'b0;
      end
      @(posedge clk); #1;
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
