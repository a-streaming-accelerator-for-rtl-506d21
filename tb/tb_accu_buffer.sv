// tb_accu_buffer -- self-checking test of the accumulation buffer.
// Run 1: three channels of partial sums for two bands of two features are
// accumulated (first channel overwrites, the rest add with saturation), then
// written back; every written word and address is checked.
// Run 2: one channel, then 2x2 max pooling in the scratchpad and write-back
// of the pooled words, checked against a reference pooling of the sums.
module tb_accu_buffer;
  import cnn_pkg::*;
  localparam int OC = 9, NB = 2, H = 14;   // output columns, bands, input rows
  logic clk = 0, rst_n = 0;
  layer_cfg_t cfg = '0;
  logic [BAND_W-1:0] nbands = BAND_W'(NB);
  logic psum_valid = 0, psum_first_ch = 0, start_pool = 0, start_wb = 0, busy;
  logic [BAND_W-1:0] psum_band = '0;
  logic [COL_W-1:0] psum_ocol = '0;
  pix_t [NUM_CU-1:0] psum = '0;
  logic wr_en;
  logic [HALF_AW-1:0] wr_addr;
  word_t wr_data;
  int checks = 0, failures = 0;
  pix_t accm [NFEAT][NB*8][OC];
  word_t expw [int];
  int nwr = 0;

  accu_buffer #(.SP_DEPTH(64), .MAX_PCOLS(16)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (rst_n && wr_en) begin
      nwr++;
      checks++;
      if (!expw.exists(int'(wr_addr))) begin failures++; $display("write to unexpected %0d", wr_addr); end
      else begin
        for (int g = 0; g < 8; g++) begin
          if (expw[int'(wr_addr)][g] === 16'sh7eee) continue;   // lane without data
          checks++;
          if (wr_data[g] !== expw[int'(wr_addr)][g]) begin
            failures++; $display("addr %0d lane %0d got %0d exp %0d", wr_addr, g, wr_data[g], expw[int'(wr_addr)][g]);
          end
        end
        expw.delete(int'(wr_addr));
      end
    end
  end

  task automatic accumulate(input int nch);
    for (int ch = 0; ch < nch; ch++)
      for (int b = 0; b < NB; b++)
        for (int oc = 0; oc < OC; oc++) begin
          @(negedge clk);
          psum_valid = 1; psum_first_ch = (ch == 0); psum_band = BAND_W'(b); psum_ocol = COL_W'(oc);
          for (int k = 0; k < NUM_CU; k++) begin
            psum[k] = pix_t'($urandom % 40000) - 16'sd20000;
            if (ch == 0) accm[k/8][b*8 + k%8][oc] = psum[k];
            else accm[k/8][b*8 + k%8][oc] = sat16(40'(accm[k/8][b*8 + k%8][oc]) + 40'(psum[k]));
          end
          if ($urandom % 3 == 0) begin @(negedge clk); psum_valid = 0; end
        end
    @(negedge clk); psum_valid = 0;
  endtask

  task automatic wait_idle();
    @(negedge clk);
    while (busy) @(negedge clk);
    repeat (2) @(negedge clk);   // let the monitor see the last write
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // ---------------- run 1: accumulate three channels, write back
    cfg.height = DIM_W'(H); cfg.stride = 3'd1; cfg.out_base = 12'd100;
    accumulate(3);
    for (int f = 0; f < 2; f++)
      for (int b = 0; b < NB; b++)
        for (int oc = 0; oc < OC; oc++) begin
          word_t w;
          for (int g = 0; g < 8; g++) w[g] = accm[f][b*8+g][oc];
          expw[100 + f * NB * OC + b * OC + oc] = w;
        end
    @(negedge clk); start_wb = 1; @(negedge clk); start_wb = 0;
    wait_idle();
    checks++;
    if (expw.size() != 0 || nwr != 2 * NB * OC) begin failures++; $display("run 1: %0d writes, %0d missing", nwr, expw.size()); end
    // ---------------- run 2: one channel, 2x2 pooling, write back
    cfg.pool_en = 1; cfg.pool3 = 0; cfg.out_base = 12'd7;
    accumulate(1);
    begin
      int vr[$];
      int np, a;
      for (int t = 0; t <= H - 3; t++) vr.push_back(t);
      np = OC / 2;
      for (int f = 0; f < 2; f++) begin
        a = 0;
        for (int b = 0; b < NB; b++)
          for (int p = 0; p < np; p++) begin
            word_t w;
            int u;
            for (int g = 0; g < 8; g++) w[g] = 16'sh7eee;
            u = 0;
            for (int wi = 0; wi < vr.size() / 2; wi++) begin
              if ((vr[2*wi+1] + 2) / 8 != b) continue;
              w[u] = PIX_MIN;
              for (int i = 0; i < 2; i++)
                for (int j = 0; j < 2; j++) w[u] = max2(w[u], accm[f][vr[2*wi+i] + 2][2*p+j]);
              u++;
            end
            expw[7 + f * NB * np + a] = w;
            a++;
          end
      end
    end
    nwr = 0;
    @(negedge clk); start_pool = 1; @(negedge clk); start_pool = 0;
    wait_idle();
    @(negedge clk); start_wb = 1; @(negedge clk); start_wb = 0;
    wait_idle();
    checks++;
    if (expw.size() != 0) begin failures++; $display("run 2: %0d pooled words missing", expw.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
