// tb_cu -- self-checking test of one 3x3 convolution unit.
// Loads coefficients over the bus (including writes for other CU ids, which
// must be ignored), swaps them in with filt_update, and streams bands of
// three rows with random bubbles. Checks every PSUM against an independent
// fixed-point model for stride 1, 2 and 3, with and without bias, checks that
// weights pre-fetched during a band do not disturb it, checks shadow_full,
// the 1x1 output and the two-cycle latency.
module tb_cu;
  import cnn_pkg::*;
  localparam int W = 12;
  logic clk = 0, rst_n = 0;
  logic bus_valid = 0, filt_update = 0, shadow_full;
  logic [7:0] bus_addr = '0;
  pix_t bus_data = '0;
  logic [2:0] stride = 3'd1;
  logic mode1x1 = 0, in_valid = 0, in_first_ch = 0, row_en = 1;
  logic [COL_W-1:0] in_col = '0;
  group_t data_in = '0;
  pix_t psum, psum1;
  logic psum_valid, win;
  int checks = 0, failures = 0;
  pix_t wgt [10];
  pix_t x [3][W];
  pix_t expq[$];
  int latq[$];
  int cyc = 0;

  cu #(.CU_ID(4'd5)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor, sampled between clock edges
  always @(negedge clk) begin
    if (rst_n && psum_valid) begin
      pix_t e;
      int t0;
      checks++;
      if (expq.size() == 0) begin failures++; $display("unexpected psum"); end
      else begin
        e = expq.pop_front(); t0 = latq.pop_front();
        if ((mode1x1 ? psum1 : psum) !== e) begin
          failures++; $display("psum got %0d exp %0d", mode1x1 ? psum1 : psum, e);
        end
        checks++;
        if (cyc - t0 != 2) begin failures++; $display("latency %0d", cyc - t0); end
      end
    end
  end

  task automatic load(input int id, input pix_t v [10]);
    for (int k = 0; k < 10; k++) begin
      @(negedge clk);
      bus_valid = 1; bus_addr = {4'(id), 4'(k)}; bus_data = v[k];
    end
    @(negedge clk); bus_valid = 0;
  endtask

  function automatic pix_t ref3(int c0, logic fch, pix_t w [10]);
    logic signed [39:0] s;
    s = fch ? (40'(w[9]) <<< 8) : '0;
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++) s += 40'(w[3*i+j]) * 40'(x[i][c0+j]);
    return sat16(s >>> 8);
  endfunction

  function automatic pix_t ref1(int c, logic fch, pix_t w [10]);
    logic signed [39:0] s;
    s = (fch ? (40'(w[9]) <<< 8) : '0) + 40'(w[8]) * 40'(x[2][c]);
    return sat16(s >>> 8);
  endfunction

  task automatic band(input int s, input logic fch, input logic m1, input logic prefetch);
    pix_t nxt [10];
    for (int k = 0; k < 10; k++) nxt[k] = pix_t'($urandom % 1024) - 16'sd512;
    for (int r = 0; r < 3; r++)
      for (int c = 0; c < W; c++) x[r][c] = pix_t'($urandom % 4096) - 16'sd2048;
    stride = 3'(s); mode1x1 = m1;
    for (int c = 0; c < W; c++) begin
      @(negedge clk);
      in_valid = 1; in_col = COL_W'(c); in_first_ch = fch;
      for (int r = 0; r < 3; r++) data_in[r] = x[r][c];
      // pre-fetch the next weights in the middle of the band
      if (prefetch && c < 10) begin
        bus_valid = 1; bus_addr = {4'd5, 4'(c)}; bus_data = nxt[c];
      end else bus_valid = 0;
      if (!m1 && c >= 2 && (c - 2) % s == 0) begin expq.push_back(ref3(c - 2, fch, wgt)); latq.push_back(cyc); end
      if (m1 && c % s == 0)                  begin expq.push_back(ref1(c, fch, wgt));     latq.push_back(cyc); end
      if ($urandom % 4 == 0) begin @(negedge clk); in_valid = 0; bus_valid = 0; end
    end
    @(negedge clk); in_valid = 0; bus_valid = 0;
    if (prefetch) begin
      checks++;
      if (!shadow_full) begin failures++; $display("shadow_full not set"); end
      @(negedge clk); filt_update = 1; wgt = nxt;
      @(negedge clk); filt_update = 0;
      checks++;
      if (shadow_full) begin failures++; $display("shadow_full not cleared"); end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 10; k++) wgt[k] = pix_t'($urandom % 1024) - 16'sd512;
    load(5, wgt);
    begin
      pix_t junk [10];
      for (int k = 0; k < 10; k++) junk[k] = 16'sh7fff;
      load(3, junk);   // another CU's coefficients: ignored
    end
    checks++;
    if (!shadow_full) begin failures++; $display("shadow_full after load"); end
    @(negedge clk); filt_update = 1; @(negedge clk); filt_update = 0;
    for (int n = 0; n < 12; n++) band(1 + (n % 3), n % 2 == 0, 1'b0, n % 4 == 3);
    for (int n = 0; n < 4; n++) band(1 + (n % 2), n % 2 == 0, 1'b1, 1'b0);
    repeat (4) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d psums missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
