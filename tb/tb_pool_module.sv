// tb_pool_module -- self-checking test of the streaming max-pooling block.
// For every combination of pool size 2/3 and stride 1/2 it streams a random
// feature map band by band (lane g of band b = row 8b+g-2, rows outside the
// map or dropped by the stride marked invalid), and compares the pooled words
// with a reference that lists the valid rows in order, cuts them into
// windows of K rows and K columns and takes the maximum. This covers windows
// that straddle two bands (through the internal carry buffer).
module tb_pool_module;
  import cnn_pkg::*;
  localparam int WC = 11, NB = 4, HV = 27;  // columns, bands, valid map rows
  logic clk = 0, rst_n = 0;
  logic cfg_stride2 = 0, cfg_pool3 = 0, start = 0, in_valid = 0, band_start = 0;
  logic [LANES-1:0] row_valid = '0, out_mask;
  word_t in_data = '0, out_data;
  logic out_valid;
  int checks = 0, failures = 0;
  pix_t fm [NB*8][WC];
  pix_t expq[$];
  int carried = 0;

  pool_module dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      for (int u = 0; u < 4; u++) begin
        if (out_mask[u]) begin
          pix_t e;
          checks++;
          if (expq.size() == 0) begin failures++; $display("extra output"); end
          else begin
            e = expq.pop_front();
            if (out_data[u] !== e) begin failures++; $display("lane %0d got %0d exp %0d", u, out_data[u], e); end
          end
        end
      end
    end
  end

  task automatic run(input int s, input int k);
    int vrows[$];     // global row numbers of valid rows, in order
    int band_of_last;
    cfg_stride2 = (s == 2); cfg_pool3 = (k == 3);
    for (int r = 0; r < NB * 8; r++)
      for (int c = 0; c < WC; c++) fm[r][c] = pix_t'($urandom);
    for (int t = 0; t < HV; t++) if (t % s == 0) vrows.push_back(t);
    // reference, in output order: band of the window's last row, then pcol
    for (int b = 0; b < NB; b++)
      for (int p = 0; p < WC / k; p++)
        for (int w = 0; w < vrows.size() / k; w++) begin
          int tl;
          tl = vrows[w * k + k - 1];
          if ((tl + 2) / 8 != b) continue;
          if ((vrows[w * k] + 2) / 8 != b) carried++;
          begin
            pix_t m;
            m = PIX_MIN;
            for (int i = 0; i < k; i++)
              for (int j = 0; j < k; j++) m = max2(m, fm[vrows[w * k + i]][p * k + j]);
            expq.push_back(m);
          end
        end
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int b = 0; b < NB; b++)
      for (int c = 0; c < WC; c++) begin
        in_valid = 1; band_start = (c == 0);
        for (int g = 0; g < 8; g++) begin
          int t;
          t = 8 * b + g - 2;
          row_valid[g] = (t >= 0 && t < HV && t % s == 0);
          in_data[g] = (t >= 0) ? fm[t][c] : PIX_MAX;
          if (!row_valid[g]) in_data[g] = PIX_MAX;   // must be ignored
        end
        @(negedge clk);
        if ($urandom % 5 == 0) begin in_valid = 0; @(negedge clk); end
      end
    in_valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d pooled values missing (s%0d k%0d)", expq.size(), s, k); expq.delete(); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      run(1, 2); run(1, 3); run(2, 2); run(2, 3);
    end
    checks++;
    if (carried == 0) begin failures++; $display("no window straddled a band"); end
    $display("windows across bands: %0d", carried);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
