// tb_cnn_accel_top -- end-to-end test of the accelerator at its default sizes.
//
// The whole command list (ten passes, a run of NOPs longer than the FIFO,
// END) sits in a DRAM model before reset; the chip fetches it by itself.
// For each pass the test writes an input tile into the Layer_input half
// through the DRAM port, gives one start credit over AXI (the last pass
// runs in auto-run mode instead), serves weight requests like a DMA (all sixteen CUs, ten values each,
// one bus write per cycle, so the first bands wait for weights), waits for
// done and reads the result back through the DRAM port. Results are
// compared with an independent model of Equation (1) in the design's
// fixed-point format: per channel the CU sum with bias on channel 0, scaled
// and saturated, then saturating accumulation over channels, then optional
// max pooling over the kept rows. Layers cover 3x3 stride 1/2/3/4, 1x1, 2x2
// and 3x3 pooling, both buffer-bank halves, a 4-channel AlexNet layer-3
// tile shape and a full 8-row, 256-channel tile of that layer. Mechanisms counted (each must occur): weight stall,
// weight swap, strided layer, pooling, pooling window across two bands,
// 1x1 mode, each half as input, command FIFO back-pressure, a RUN waiting
// for the host. The AXI status and pass counter are checked at the end.
module tb_cnn_accel_top;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cmd_mem_req, cmd_mem_gnt = 0, cmd_mem_rvalid = 0;
  logic [23:0] cmd_mem_addr;
  logic [15:0] cmd_mem_rdata = '0;
  logic axi_awvalid = 0, axi_awready, axi_wvalid = 0, axi_wready, axi_bvalid, axi_bready = 0;
  logic axi_arvalid = 0, axi_arready, axi_rvalid, axi_rready = 0;
  logic [3:0] axi_awaddr = '0, axi_araddr = '0;
  logic [15:0] axi_wdata = '0, axi_rdata;
  logic [1:0] axi_bresp, axi_rresp;
  logic wbus_valid = 0, wreq;
  logic [7:0] wbus_addr = '0;
  logic [15:0] wbus_data = '0;
  logic ext_en = 0, ext_we = 0, ext_ready;
  logic [12:0] ext_addr = '0;
  word_t ext_wdata = '0, ext_rdata;
  logic busy, stall, layer_done;
  int checks = 0, failures = 0;

  cnn_accel_top dut (.*);
  always #5 clk = ~clk;

  initial begin
    #50000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- layer description and model
  localparam int MW = 80, MH = 40, MC = 256;
  int W, H, C, S, K, pool, m1, sel, IB, OB;
  pix_t img [MC][MH][MW];
  pix_t wt [2][MC][3][3];
  pix_t bias [2];
  pix_t accm [2][MH][MW];
  // kernel decomposition: a 5x5 layer of KC channels run as 4*KC channels of
  // 3x3 sub-kernels on copies of the input shifted by 0 or 3 rows and columns
  localparam int KC = 2;
  int kd = 0;
  pix_t k5 [2][KC][5][5];
  pix_t base5 [KC][MH][MW];

  // mechanism counters
  int n_stall = 0, n_swap = 0, n_strided = 0, n_pool = 0, n_carry = 0, n_1x1 = 0;
  int n_sel0 = 0, n_sel1 = 0, n_fifo_full = 0, n_reads = 0, n_host_wait = 0;
  int cyc = 0, rd_first = -1, rd_last = 0, rd_cnt = 0, st_cnt = 0;
  always @(posedge clk) begin
    cyc++;
    if (dut.u_ctrl.rd_en) begin
      if (rd_first < 0) rd_first = cyc;
      rd_last = cyc; rd_cnt++;
    end
    if (stall && rd_first >= 0) st_cnt++;
    if (stall) n_stall++;
    if (dut.tag_q.valid && dut.tag_q.upd) n_swap++;
    if (dut.u_ctrl.rd_en) n_reads++;
    if (dut.l_valid && !dut.l_ready) n_fifo_full++;
    if (dut.f_valid && dut.f_data[15:12] == OP_RUN && !dut.u_dec.run_allowed) n_host_wait++;
    if (dut.u_acc.u_pool.in_valid && dut.u_acc.u_pool.band_start && dut.u_acc.u_pool.p_eff != 0) n_carry++;
  end

  // ---------------- weight DMA model
  int ch_sent = 0, ch_total = 0;
  initial begin
    forever begin
      @(negedge clk);
      if (wreq && ch_sent < ch_total) begin
        for (int k = 0; k < NUM_CU; k++)
          for (int q = 0; q < 10; q++) begin
            wbus_valid = 1; wbus_addr = {4'(k), 4'(q)};
            wbus_data = (q == 9) ? bias[k / 8] : wt[k / 8][ch_sent][q / 3][q % 3];
            @(negedge clk);
          end
        wbus_valid = 0;
        ch_sent++;
      end
    end
  end

  task automatic ext_write(input logic h, input int a, input word_t d);
    @(negedge clk);
    ext_en = 1; ext_we = 1; ext_addr = {h, 12'(a)}; ext_wdata = d;
    @(negedge clk);
    ext_en = 0; ext_we = 0;
  endtask

  task automatic ext_read(input logic h, input int a, output word_t d);
    @(negedge clk);
    ext_en = 1; ext_we = 0; ext_addr = {h, 12'(a)};
    @(negedge clk);
    ext_en = 0;
    d = ext_rdata;
  endtask

  // ---------------- DRAM model holding the command list
  logic [15:0] cmdmem [int];
  int ncmd = 0;
  function automatic void add_cmd(input logic [3:0] op, input logic [11:0] imm);
    cmdmem[ncmd] = {op, imm};
    ncmd++;
  endfunction

  initial begin
    forever begin
      @(negedge clk);
      cmd_mem_rvalid = 0;
      cmd_mem_gnt = cmd_mem_req && ($urandom % 2 == 0);
      if (cmd_mem_gnt) begin
        int a;
        a = int'(cmd_mem_addr);
        repeat (1 + $urandom % 3) @(negedge clk);
        cmd_mem_gnt = 0;
        cmd_mem_rvalid = 1;
        cmd_mem_rdata = cmdmem.exists(a) ? cmdmem[a] : 16'h0000;
      end
    end
  end

  // ---------------- AXI4-Lite host
  task automatic axi_write(input logic [3:0] a, input logic [15:0] d);
    @(negedge clk);
    axi_awvalid = 1; axi_awaddr = a; axi_wvalid = 1; axi_wdata = d; axi_bready = 1;
    @(posedge clk);
    while (!(axi_awready && axi_wready)) @(posedge clk);
    @(negedge clk);
    axi_awvalid = 0; axi_wvalid = 0;
    while (!axi_bvalid) @(negedge clk);
    @(negedge clk);
    axi_bready = 0;
  endtask

  task automatic axi_read(input logic [3:0] a, output logic [15:0] d);
    @(negedge clk);
    axi_arvalid = 1; axi_araddr = a; axi_rready = 1;
    @(posedge clk);
    while (!axi_arready) @(posedge clk);
    @(negedge clk);
    axi_arvalid = 0;
    while (!axi_rvalid) @(negedge clk);
    d = axi_rdata;
    @(negedge clk);
    axi_rready = 0;
  endtask

  // the command list of one pass
  function automatic void add_layer(input int w, input int h, input int c, input int s, input int k,
                                    input int m, input int hsel, input int ib, input int ob);
    add_cmd(OP_IN_BASE, 12'(ib)); add_cmd(OP_OUT_BASE, 12'(ob));
    add_cmd(OP_WIDTH, 12'(w)); add_cmd(OP_HEIGHT, 12'(h)); add_cmd(OP_CHANNELS, 12'(c));
    add_cmd(OP_MODE, {5'b0, 1'(m), 1'(hsel), 1'(k == 3), 1'(k != 0), 3'(s)});
    add_cmd(OP_RUN, 12'h0);
  endfunction

  function automatic int nb();
    return (H + 7) / 8;
  endfunction

  task automatic compute_ref();
    int off;
    off = m1 ? 0 : 2;
    for (int f = 0; f < 2; f++)
      for (int t = 0; t < H; t++)
        for (int oc = 0; oc < W; oc++) begin
          int c0;
          pix_t acc;
          c0 = oc * S;
          acc = '0;
          if (m1 ? (t > H - 1 || c0 > W - 1) : (t > H - 3 || c0 > W - 3)) continue;
          for (int ch = 0; ch < C; ch++) begin
            logic signed [39:0] s;
            pix_t p;
            s = (ch == 0) ? (40'(bias[f]) <<< 8) : '0;
            if (m1) s += 40'(wt[f][ch][2][2]) * 40'(img[ch][t][c0]);
            else
              for (int i = 0; i < 3; i++)
                for (int j = 0; j < 3; j++) s += 40'(wt[f][ch][i][j]) * 40'(img[ch][t+i][c0+j]);
            p = sat16(s >>> 8);
            acc = (ch == 0) ? p : sat16(40'(acc) + 40'(p));
          end
          accm[f][t][oc] = acc;
        end
  endtask

  task automatic run_layer(input int w, input int h, input int c, input int s, input int k,
                           input int m, input int hsel, input int ib, input int ob, input logic auto = 0);
    int oc_n, nw, off, errs;
    int vr[$];
    W = w; H = h; C = c; S = s; K = k; pool = (k != 0); m1 = m; sel = hsel; IB = ib; OB = ob;
    errs = failures;
    for (int ch = 0; ch < C; ch++)
      for (int r = 0; r < nb() * 8; r++)
        for (int col = 0; col < W; col++)
          // deep layers get smaller values so that 256-channel sums stay in range
          img[ch][r][col] = (C > 8) ? pix_t'($urandom % 256) - 16'sd128 : pix_t'($urandom % 4096) - 16'sd2048;
    for (int f = 0; f < 2; f++) begin
      bias[f] = pix_t'($urandom % 2048) - 16'sd1024;
      if (kd) begin
        for (int c = 0; c < KC; c++)
          for (int a = 0; a < 5; a++)
            for (int b = 0; b < 5; b++) k5[f][c][a][b] = pix_t'($urandom % 128) - 16'sd64;
        continue;
      end
      for (int ch = 0; ch < C; ch++)
        for (int i = 0; i < 3; i++)
          for (int j = 0; j < 3; j++)
            wt[f][ch][i][j] = (C > 8) ? pix_t'($urandom % 64) - 16'sd32 : pix_t'($urandom % 512) - 16'sd256;
    end
    if (kd) begin
      for (int c = 0; c < KC; c++)
        for (int r = 0; r < H; r++)
          for (int col = 0; col < W; col++) base5[c][r][col] = pix_t'($urandom % 1024) - 16'sd512;
      for (int v = 0; v < 4 * KC; v++) begin
        int c, di, dj;
        c = v / 4; di = 3 * ((v % 4) / 2); dj = 3 * (v % 2);
        for (int r = 0; r < nb() * 8; r++)
          for (int col = 0; col < W; col++)
            img[v][r][col] = (r + di < H && col + dj < W) ? base5[c][r+di][col+dj] : '0;
        for (int f = 0; f < 2; f++)
          for (int i = 0; i < 3; i++)
            for (int j = 0; j < 3; j++)
              wt[f][v][i][j] = (di + i < 5 && dj + j < 5) ? k5[f][c][di+i][dj+j] : '0;
      end
    end
    // input tile: word IB + (ch*NB + b)*W + col, lane g = row 8b+g
    for (int ch = 0; ch < C; ch++)
      for (int b = 0; b < nb(); b++)
        for (int col = 0; col < W; col++) begin
          word_t d;
          for (int g = 0; g < 8; g++) d[g] = img[ch][8*b+g][col];
          ext_write(1'(sel), IB + (ch * nb() + b) * W + col, d);
        end
    compute_ref();
    ch_sent = 0; ch_total = C;
    // let the RUN wait for the host a little, then allow it
    repeat (20) @(negedge clk);
    if (auto) axi_write(4'h0, 16'h0001);
    else      axi_write(4'h2, 16'h0001);
    @(posedge layer_done);
    // one word per cycle except while waiting for weights
    checks++;
    if (rd_last - rd_first + 1 != rd_cnt + st_cnt) begin
      failures++; $display("stream: %0d cycles for %0d words and %0d stalls", rd_last - rd_first + 1, rd_cnt, st_cnt);
    end
    rd_first = -1; rd_cnt = 0; st_cnt = 0;
    repeat (2) @(negedge clk);
    if (S > 1) n_strided++;
    if (pool) n_pool++;
    if (m1) n_1x1++;
    if (sel) n_sel1++; else n_sel0++;
    // read back and compare
    off = m1 ? 0 : 2;
    oc_n = m1 ? (W - 1) / S + 1 : (W - 3) / S + 1;
    for (int t = 0; t <= (m1 ? H - 1 : H - 3); t++) if (t % S == 0) vr.push_back(t);
    if (!pool) begin
      nw = nb() * oc_n;
      for (int f = 0; f < 2; f++)
        for (int b = 0; b < nb(); b++)
          for (int oc = 0; oc < oc_n; oc++) begin
            word_t d;
            ext_read(1'(!sel), OB + f * nw + b * oc_n + oc, d);
            for (int g = 0; g < 8; g++) begin
              int t;
              t = 8 * b + g - off;
              if (t < 0 || t % S != 0 || t > (m1 ? H - 1 : H - 3)) continue;
              checks++;
              if (d[g] !== accm[f][t][oc]) begin
                failures++;
                if (failures - errs < 6) $display("f%0d t%0d oc%0d got %0d exp %0d", f, t, oc, d[g], accm[f][t][oc]);
              end
            end
          end
    end else begin
      int pc;
      pc = oc_n / K;
      nw = nb() * pc;
      for (int f = 0; f < 2; f++)
        for (int b = 0; b < nb(); b++)
          for (int p = 0; p < pc; p++) begin
            word_t d;
            int u;
            ext_read(1'(!sel), OB + f * nw + b * pc + p, d);
            u = 0;
            for (int wi = 0; wi < vr.size() / K; wi++) begin
              pix_t m;
              if ((vr[K*wi + K - 1] + off) / 8 != b) continue;
              m = PIX_MIN;
              for (int i = 0; i < K; i++)
                for (int j = 0; j < K; j++) m = max2(m, accm[f][vr[K*wi+i]][p*K+j]);
              checks++;
              if (d[u] !== m) begin
                failures++;
                if (failures - errs < 6) $display("pool f%0d b%0d p%0d u%0d got %0d exp %0d", f, b, p, u, d[u], m);
              end
              u++;
            end
          end
    end
    // the decomposed layer against a direct 5x5 convolution: each of the
    // 4*KC partial sums is truncated on its own, so the chip's result is at
    // most 4*KC-1 LSBs below the single truncation of the whole sum
    if (kd)
      for (int f = 0; f < 2; f++)
        for (int t = 0; t <= H - 5; t++)
          for (int oc = 0; oc <= W - 5; oc++) begin
            logic signed [39:0] sd;
            int dif;
            sd = 40'(bias[f]) <<< 8;
            for (int c = 0; c < KC; c++)
              for (int a = 0; a < 5; a++)
                for (int b = 0; b < 5; b++) sd += 40'(k5[f][c][a][b]) * 40'(base5[c][t+a][oc+b]);
            dif = int'(sd >>> 8) - int'(accm[f][t][oc]);
            checks++;
            if (dif < 0 || dif > 4 * KC - 1) begin
              failures++;
              if (failures - errs < 6) $display("5x5 f%0d t%0d oc%0d direct %0d chip %0d", f, t, oc, int'(sd >>> 8), accm[f][t][oc]);
            end
          end
    if (kd) $display("5x5 kernel in 3x3 pieces:");
    $display("layer W%0d H%0d C%0d s%0d pool%0d 1x1=%0d half%0d: %0d mismatches", W, H, C, S, K, m1, sel, failures - errs);
  endtask

  initial begin
    int reads0;
    logic [15:0] st;
    // the command list is in DRAM before the chip comes out of reset
    add_layer(12, 20, 3, 1, 0, 0, 0, 0, 0);
    for (int i = 0; i < 140; i++) add_cmd(OP_NOP, 12'h0);   // longer than the FIFO
    add_layer(17, 21, 2, 2, 2, 0, 1, 40, 100);
    add_layer(20, 30, 2, 1, 3, 0, 0, 5, 300);
    add_layer(10, 16, 3, 1, 2, 1, 1, 0, 0);
    add_layer(16, 16, 2, 3, 0, 0, 0, 0, 0);
    add_layer(15, 15, 4, 1, 0, 0, 1, 100, 700);
    add_layer(15, 8, 256, 1, 0, 0, 1, 0, 0);
    add_layer(16, 16, 4 * KC, 1, 0, 0, 0, 200, 3000);
    add_layer(23, 26, 3, 4, 0, 0, 1, 50, 500);
    add_layer(MW, MH, 2, 1, 2, 0, 0, 1000, 2000);
    add_cmd(OP_END, 12'h0);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // stride 1, no pooling; the stream rate is checked on this layer
    reads0 = n_reads;
    run_layer(12, 20, 3, 1, 0, 0, 0, 0, 0);
    checks++;
    if (n_reads - reads0 != 12 * 3 * 3) begin failures++; $display("reads %0d", n_reads - reads0); end
    run_layer(17, 21, 2, 2, 2, 0, 1, 40, 100);    // stride 2, 2x2 pool, other half
    run_layer(20, 30, 2, 1, 3, 0, 0, 5, 300);     // 3x3 pool, windows across bands
    run_layer(10, 16, 3, 1, 2, 1, 1, 0, 0);       // 1x1, 2x2 pool
    run_layer(16, 16, 2, 3, 0, 0, 0, 0, 0);       // stride 3
    run_layer(15, 15, 4, 1, 0, 0, 1, 100, 700);   // AlexNet layer-3 tile shape
    run_layer(15, 8, 256, 1, 0, 0, 1, 0, 0);      // AlexNet layer 3: one 8-row tile, all 256 channels
    kd = 1;
    run_layer(16, 16, 4 * KC, 1, 0, 0, 0, 200, 3000); // 5x5 kernel by kernel decomposition
    kd = 0;
    run_layer(23, 26, 3, 4, 0, 0, 1, 50, 500);    // stride 4
    run_layer(MW, MH, 2, 1, 2, 0, 0, 1000, 2000, 1'b1); // largest tile, auto-run
    repeat (50) @(negedge clk);
    axi_read(4'h4, st);
    checks++;
    if (st[1:0] != 2'b10 || st[15:8] != 0) begin failures++; $display("status %h", st); end
    axi_read(4'h6, st);
    checks++;
    if (st != 10) begin failures++; $display("passes %0d", st); end
    $display("mechanisms: stall=%0d swap=%0d strided=%0d pool=%0d carry=%0d 1x1=%0d half0=%0d half1=%0d fifo_full=%0d host_wait=%0d",
             n_stall, n_swap, n_strided, n_pool, n_carry, n_1x1, n_sel0, n_sel1, n_fifo_full, n_host_wait);
    checks++; if (n_host_wait == 0) begin failures++; $display("no RUN waited for the host"); end
    checks++; if (n_stall == 0)   begin failures++; $display("no weight stall"); end
    checks++; if (n_swap == 0)    begin failures++; $display("no weight swap"); end
    checks++; if (n_strided == 0) begin failures++; $display("no strided layer"); end
    checks++; if (n_pool == 0)    begin failures++; $display("no pooling"); end
    checks++; if (n_carry == 0)   begin failures++; $display("no pooling window across bands"); end
    checks++; if (n_1x1 == 0)     begin failures++; $display("no 1x1 layer"); end
    checks++; if (n_sel0 == 0 || n_sel1 == 0) begin failures++; $display("a half never used as input"); end
    checks++; if (n_fifo_full == 0) begin failures++; $display("command FIFO never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
