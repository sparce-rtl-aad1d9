// tb_mac_unit: self-checking test of the MAC unit: lane-wise multiply and
// multiply-accumulate with a broadcast lane (every lane select), random
// operands, results computed per lane in the testbench.
module tb_mac_unit;
  import sparce_pkg::*;
  localparam int LANES = 4;
  localparam int W = LANES * XLEN;
  logic mode;
  logic [2:0] sel;
  logic [W-1:0] acc, a, b, y, e;
  int checks = 0, failures = 0;
  logic clk = 0;

  mac_unit #(.LANES(LANES)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 600; i++) begin
      mode = i[0];
      sel  = 3'($urandom % LANES);
      for (int l = 0; l < LANES; l++) begin
        acc[l*XLEN +: XLEN] = $urandom;
        a[l*XLEN +: XLEN]   = $urandom % 100000;
        b[l*XLEN +: XLEN]   = ($urandom % 4 == 0) ? 0 : $urandom % 100000;
      end
      for (int l = 0; l < LANES; l++) begin
        logic [XLEN-1:0] bl;
        bl = b[int'(sel)*XLEN +: XLEN];
        if (mode) e[l*XLEN +: XLEN] = acc[l*XLEN +: XLEN] + a[l*XLEN +: XLEN] * bl;
        else      e[l*XLEN +: XLEN] = a[l*XLEN +: XLEN] * b[l*XLEN +: XLEN];
      end
      #1;
      checks++;
      if (y !== e) begin
        failures++;
        $display("mode %0d sel %0d: y %h exp %h", mode, sel, y, e);
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
