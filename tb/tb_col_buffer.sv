// tb_col_buffer -- self-checking test of the column buffer.
// Streams three bands of a 20-column image (pixel value = f(row, column)),
// with random idle cycles, and checks every group x_g = rows 8i+g-2..8i+g one
// cycle after each word, including the rows taken from the row buffer.
module tb_col_buffer;
  import cnn_pkg::*;
  localparam int W = 20;
  logic clk = 0, rst_n = 0;
  tag_t in_tag = '0, out_tag;
  word_t in_data = '0;
  group_t [LANES-1:0] out_data;
  int checks = 0, failures = 0;

  col_buffer #(.MAX_COLS(32)) dut (.*);
  always #5 clk = ~clk;

  function automatic pix_t px(int r, int c);
    return pix_t'(r * 97 + c * 5 + 3);
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 3; b++) begin
      for (int c = 0; c < W; c++) begin
        @(negedge clk);
        in_tag = '0; in_tag.valid = 1; in_tag.band = BAND_W'(b); in_tag.col = COL_W'(c);
        for (int g = 0; g < LANES; g++) in_data[g] = px(8 * b + g, c);
        @(negedge clk);
        in_tag.valid = 0;
        checks++;
        if (!out_tag.valid || out_tag.col != COL_W'(c) || out_tag.band != BAND_W'(b)) begin
          failures++; $display("tag wrong b%0d c%0d", b, c);
        end
        for (int g = 0; g < LANES; g++) begin
          if (b == 0 && g < 2) continue;
          for (int r = 0; r < 3; r++) begin
            checks++;
            if (out_data[g][r] !== px(8 * b + g - 2 + r, c)) begin
              failures++;
              $display("b%0d c%0d g%0d r%0d got %0d exp %0d", b, c, g, r, out_data[g][r], px(8*b+g-2+r, c));
            end
          end
        end
        // back-to-back words half of the time
        if ($urandom % 2 == 0) begin
          @(negedge clk);
        end
      end
    end
    checks++;
    @(negedge clk);
    if (out_tag.valid) begin failures++; $display("valid stuck"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
