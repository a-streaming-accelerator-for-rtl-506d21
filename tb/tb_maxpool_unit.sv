// tb_maxpool_unit -- self-checking test of one max-pool unit.
// Feeds random windows of 2 or 3 columns (two or three rows each, unused
// inputs at the most negative value), with idle cycles in between, and
// checks Output_EN and the window maximum on each window's last column.
module tb_maxpool_unit;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, first = 0, last = 0;
  pix_t i0 = '0, i1 = '0, i2 = '0, out;
  logic out_en;
  int checks = 0, failures = 0;

  maxpool_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < 300; w++) begin
      int k;
      pix_t m;
      k = 2 + ($urandom % 2);
      m = PIX_MIN;
      for (int c = 0; c < k; c++) begin
        @(negedge clk);
        in_valid = 1; first = (c == 0); last = (c == k - 1);
        i0 = pix_t'($urandom); i1 = pix_t'($urandom);
        i2 = (k == 3) ? pix_t'($urandom) : PIX_MIN;
        m = max2(m, max2(i0, max2(i1, i2)));
        #1;
        checks++;
        if (out_en !== (c == k - 1)) begin failures++; $display("out_en wrong"); end
        if (c == k - 1) begin
          checks++;
          if (out !== m) begin failures++; $display("window %0d: got %0d exp %0d", w, out, m); end
        end
        if ($urandom % 4 == 0) begin
          @(negedge clk); in_valid = 0;
          i0 = PIX_MAX;  // ignored while idle
        end
      end
      @(negedge clk); in_valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
