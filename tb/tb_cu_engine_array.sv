// tb_cu_engine_array -- self-checking test of the 16-CU engine array.
// Loads different filters into all sixteen CUs, sets all_full and swaps them
// in, then streams two bands of an image as 3-row groups (group g = rows
// 8b+g-2..8b+g, as the column buffer makes them). For stride 1 and 2 it
// checks every kept output (eight rows x two features) against a model of
// Equation (1), the output column numbering and the band tag.
module tb_cu_engine_array;
  import cnn_pkg::*;
  localparam int W = 10, H = 16;
  logic clk = 0, rst_n = 0;
  logic bus_valid = 0, filt_update = 0, all_full, mode1x1 = 0;
  logic [7:0] bus_addr = '0;
  pix_t bus_data = '0;
  logic [2:0] stride = 3'd1;
  tag_t in_tag = '0;
  group_t [LANES-1:0] in_data = '0;
  logic out_valid, out_first_ch;
  logic [BAND_W-1:0] out_band;
  logic [COL_W-1:0] out_ocol;
  pix_t [NUM_CU-1:0] psum;
  int checks = 0, failures = 0;
  pix_t wgt [NUM_CU][10];
  pix_t img [H][W];
  int s_cur;

  cu_engine_array dut (.*);
  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic pix_t ref3(int k, int t, int c0);
    logic signed [39:0] s;
    s = 40'(wgt[k][9]) <<< 8;
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++) s += 40'(wgt[k][3*i+j]) * 40'(img[t+i][c0+j]);
    return sat16(s >>> 8);
  endfunction

  int expected_outputs, seen_outputs;
  int ocol_seen [2];
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      int b, oc, c0;
      seen_outputs++;
      b = int'(out_band); oc = int'(out_ocol); c0 = oc * s_cur;
      checks++;
      if (oc != ocol_seen[b]) begin failures++; $display("ocol %0d exp %0d", oc, ocol_seen[b]); end
      ocol_seen[b]++;
      for (int k = 0; k < NUM_CU; k++) begin
        int t;
        t = 8 * b + (k % 8) - 2;
        if (t < 0 || t > H - 3 || t % s_cur != 0) continue;
        checks++;
        if (psum[k] !== ref3(k, t, c0)) begin
          failures++; $display("cu%0d band%0d ocol%0d got %0d exp %0d", k, b, oc, psum[k], ref3(k, t, c0));
        end
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int s = 1; s <= 2; s++) begin
      s_cur = s; stride = 3'(s);
      for (int k = 0; k < NUM_CU; k++)
        for (int q = 0; q < 10; q++) begin
          wgt[k][q] = pix_t'($urandom % 512) - 16'sd256;
          @(negedge clk);
          bus_valid = 1; bus_addr = {4'(k), 4'(q)}; bus_data = wgt[k][q];
        end
      @(negedge clk); bus_valid = 0;
      checks++;
      if (!all_full) begin failures++; $display("all_full low"); end
      filt_update = 1; @(negedge clk); filt_update = 0;
      checks++;
      if (all_full) begin failures++; $display("all_full not cleared"); end
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) img[r][c] = pix_t'($urandom % 2048) - 16'sd1024;
      ocol_seen[0] = 0; ocol_seen[1] = 0;
      for (int b = 0; b < 2; b++)
        for (int c = 0; c < W; c++) begin
          in_tag = '0; in_tag.valid = 1; in_tag.first_ch = 1; in_tag.band = BAND_W'(b); in_tag.col = COL_W'(c);
          for (int g = 0; g < 8; g++)
            for (int r = 0; r < 3; r++) begin
              int row;
              row = 8 * b + g - 2 + r;
              in_data[g][r] = (row >= 0) ? img[row][c] : pix_t'(16'sh1234);
            end
          @(negedge clk);
        end
      in_tag = '0;
      repeat (4) @(negedge clk);
      checks++;
      if (ocol_seen[0] != (W - 3) / s + 1 || ocol_seen[1] != (W - 3) / s + 1) begin
        failures++; $display("output columns %0d %0d", ocol_seen[0], ocol_seen[1]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
