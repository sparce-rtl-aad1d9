// tb_svc: self-checking test of the Sparse Value Checker.
// Applies writeback results with randomly zeroed lanes and checks the SpRF
// update (valid only for register-writing instructions, destination, and the
// zero-lane mask computed independently in the testbench).
module tb_svc;
  import sparce_pkg::*;
  localparam int LANES = 4;
  logic wb_valid, wb_writes, upd_valid;
  reg_idx_t wb_rd, upd_rd;
  logic [LANES*XLEN-1:0] wb_data;
  logic [LANES-1:0] upd_sparse, exp_sp;
  int checks = 0, failures = 0;
  logic clk = 0;

  svc #(.LANES(LANES)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 500; i++) begin
      wb_valid  = ($urandom % 4) != 0;
      wb_writes = ($urandom % 4) != 0;
      wb_rd     = reg_idx_t'($urandom);
      for (int l = 0; l < LANES; l++) begin
        case (int'($urandom % 3))
          0: wb_data[l*XLEN +: XLEN] = '0;
          1: wb_data[l*XLEN +: XLEN] = XLEN'(1) << ($urandom % XLEN);  // a single set bit
          default: wb_data[l*XLEN +: XLEN] = $urandom;
        endcase
        exp_sp[l] = 1'b1;
        for (int b = 0; b < XLEN; b++) if (wb_data[l*XLEN + b]) exp_sp[l] = 1'b0;
      end
      #1;
      checks++;
      if (upd_valid !== (wb_valid && wb_writes) || upd_rd !== wb_rd || upd_sparse !== exp_sp) begin
        failures++;
        $display("mismatch: valid %b sparse %b exp %b", upd_valid, upd_sparse, exp_sp);
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
