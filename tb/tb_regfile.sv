// tb_regfile: self-checking test of the register file.
// Random writes and three-port reads against a reference array, including
// reads of the register written in the same cycle (write-through bypass) and
// the all-zero reset state.
module tb_regfile;
  import sparce_pkg::*;
  localparam int LANES = 4;
  localparam int W = LANES * XLEN;
  logic clk = 0, rst_n = 0, we;
  reg_idx_t ra, rb, rc, wa;
  logic [W-1:0] da, db, dc, wd;
  logic [W-1:0] m [NREG];
  int checks = 0, failures = 0;

  regfile #(.LANES(LANES)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] expv(reg_idx_t r);
    return (we && wa == r) ? wd : m[r];
  endfunction

  initial begin
    we = 0; wa = 0; wd = '0; ra = 0; rb = 0; rc = 0;
    for (int r = 0; r < NREG; r++) m[r] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 800; c++) begin
      @(negedge clk);
      we = ($urandom % 3) != 0;
      wa = reg_idx_t'($urandom);
      for (int l = 0; l < LANES; l++) wd[l*XLEN +: XLEN] = $urandom;
      ra = ($urandom % 4 == 0) ? wa : reg_idx_t'($urandom);
      rb = reg_idx_t'($urandom);
      rc = reg_idx_t'($urandom);
      #1;
      checks++;
      if (da !== expv(ra) || db !== expv(rb) || dc !== expv(rc)) begin
        failures++;
        if (failures < 10) $display("read mismatch at cycle %0d", c);
      end
      @(posedge clk);
      if (we) m[wa] = wd;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
