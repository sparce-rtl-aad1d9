// tb_alu: self-checking test of the lane-wise ALU: random operands for add,
// subtract and pass, plus the lane-0 inequality used by BNE, compared with
// per-lane arithmetic done in the testbench.
module tb_alu;
  import sparce_pkg::*;
  localparam int LANES = 4;
  localparam int W = LANES * XLEN;
  alu_op_e op;
  logic [W-1:0] a, b, y, e;
  logic ne;
  int checks = 0, failures = 0;
  logic clk = 0;

  alu #(.LANES(LANES)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 600; i++) begin
      op = alu_op_e'($urandom % 3);
      for (int l = 0; l < LANES; l++) begin
        a[l*XLEN +: XLEN] = $urandom;
        b[l*XLEN +: XLEN] = (i % 5 == 0) ? a[l*XLEN +: XLEN] : $urandom;
        case (op)
          ALU_ADD: e[l*XLEN +: XLEN] = a[l*XLEN +: XLEN] + b[l*XLEN +: XLEN];
          ALU_SUB: e[l*XLEN +: XLEN] = a[l*XLEN +: XLEN] - b[l*XLEN +: XLEN];
          default: e[l*XLEN +: XLEN] = b[l*XLEN +: XLEN];
        endcase
      end
      #1;
      checks++;
      if (y !== e || ne !== (a[XLEN-1:0] != b[XLEN-1:0])) begin
        failures++;
        $display("op %s: y %h exp %h ne %b", op.name(), y, e, ne);
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
