// tb_pe -- self-checking test of the processing engine.
// Drives random pixels and coefficients and checks the registered pass-
// through, the registered product and that EN_Ctrl low or shift low freezes
// the product.
module tb_pe;
  logic clk = 0, rst_n = 0, shift = 0, en_ctrl = 0;
  logic signed [15:0] din = '0, coef = '0, dout;
  logic signed [31:0] prod, exp_prod;
  logic signed [15:0] exp_dout;
  int checks = 0, failures = 0;

  pe dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    exp_prod = 0; exp_dout = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      shift = ($urandom % 4) != 0; en_ctrl = ($urandom % 3) != 0;
      din = 16'($urandom); coef = 16'($urandom);
      if (shift) begin
        exp_dout = din;
        if (en_ctrl) exp_prod = 32'(din) * 32'(coef);
      end
      @(negedge clk);
      shift = 0;
      checks += 2;
      if (dout !== exp_dout) begin failures++; $display("dout %0d exp %0d", dout, exp_dout); end
      if (prod !== exp_prod) begin failures++; $display("prod %0d exp %0d", prod, exp_prod); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
