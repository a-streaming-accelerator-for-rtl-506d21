// tb_layer_ctrl -- self-checking test of the layer sequencer.
// Starts a 3-channel, 2-band, 9-column layer with the weights ready for the
// first channel only. Checks the read address sequence and tags word by
// word, that the stream stalls at each channel start until weights_ready
// rises and otherwise issues one word per cycle (W x bands x C words in that
// many cycles plus the stalls), then the pool and write-back starts and done.
module tb_layer_ctrl;
  import cnn_pkg::*;
  localparam int W = 9, H = 13, C = 3;
  logic clk = 0, rst_n = 0, start = 0, weights_ready = 0, acc_busy = 0;
  layer_cfg_t cfg = '0;
  logic rd_en, acc_start_pool, acc_start_wb, busy, stall, wreq, done;
  logic [HALF_AW-1:0] rd_addr;
  tag_t tag;
  logic [BAND_W-1:0] nbands;
  int checks = 0, failures = 0;
  int nread = 0, nstall = 0, first_cyc = -1, last_cyc = 0, cyc = 0;
  int pools = 0, wbs = 0, dones = 0;

  layer_ctrl dut (.*);
  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // weights: available 25 cycles after they were consumed by a channel start
  int wcount = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (rd_en && tag.upd) begin weights_ready <= 0; wcount <= 25; end
    else if (wcount > 1) wcount <= wcount - 1;
    else if (wcount == 1) begin weights_ready <= 1; wcount <= 0; end
    if (stall) nstall++;
    if (acc_start_pool) begin pools++; acc_busy <= 1; end
    if (acc_start_wb) begin wbs++; acc_busy <= 1; end
    if (acc_busy && $urandom % 4 == 0) acc_busy <= 0;
    if (done) dones++;
    if (rd_en) begin
      int e_ch, e_b, e_c;
      e_ch = nread / (W * 2); e_b = (nread / W) % 2; e_c = nread % W;
      checks++;
      if (rd_addr != HALF_AW'(200 + nread) || tag.col != COL_W'(e_c) || tag.band != BAND_W'(e_b)
          || tag.first_ch != (e_ch == 0) || tag.upd != (e_b == 0 && e_c == 0) || !tag.valid) begin
        failures++; $display("word %0d: addr %0d band %0d col %0d", nread, rd_addr, tag.band, tag.col);
      end
      if (first_cyc < 0) first_cyc = cyc;
      last_cyc = cyc;
      nread++;
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    cfg.in_base = 12'd200; cfg.width = DIM_W'(W); cfg.height = DIM_W'(H); cfg.channels = DIM_W'(C);
    cfg.stride = 3'd1; cfg.pool_en = 1;
    weights_ready = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
    checks++; if (nbands != 2) begin failures++; $display("nbands %0d", nbands); end
    checks++; if (nread != W * 2 * C) begin failures++; $display("reads %0d", nread); end
    checks++;
    if (last_cyc - first_cyc + 1 != W * 2 * C + nstall) begin
      failures++; $display("stream took %0d cycles, %0d words, %0d stalls", last_cyc - first_cyc + 1, nread, nstall);
    end
    checks++; if (nstall == 0) begin failures++; $display("no stall seen"); end
    checks++; if (pools != 1 || wbs != 1 || dones != 1) begin failures++; $display("phases %0d %0d %0d", pools, wbs, dones); end
    checks++; if (busy) begin failures++; $display("still busy"); end
    $display("stalls %0d", nstall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
