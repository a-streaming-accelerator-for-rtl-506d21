// tb_instr_decoder -- self-checking test of the command decoder.
// Sends set commands for every field and checks the configuration, checks
// that RUN pulses start once and that no further command is taken until
// done, that a RUN waits while run_allowed is low, and that NOP and unknown
// opcodes change nothing.
module tb_instr_decoder;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0, cmd_valid = 0, done = 0;
  logic cmd_ready, start, busy, run_taken;
  logic run_allowed = 0;
  logic [15:0] cmd = '0;
  layer_cfg_t cfg;
  int checks = 0, failures = 0, starts = 0;

  instr_decoder dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && start) starts++;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input logic [3:0] op, input logic [11:0] imm);
    @(negedge clk);
    cmd_valid = 1; cmd = {op, imm};
    while (!cmd_ready) @(negedge clk);
    @(negedge clk);
    cmd_valid = 0;
  endtask

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 20; rep++) begin
      logic [11:0] a, b, w, h, c, m;
      a = 12'($urandom); b = 12'($urandom); w = 12'($urandom); h = 12'($urandom); c = 12'($urandom);
      m = 12'($urandom % 128);
      send(OP_IN_BASE, a); send(OP_OUT_BASE, b); send(OP_WIDTH, w);
      send(OP_HEIGHT, h); send(OP_CHANNELS, c); send(OP_MODE, m);
      send(OP_NOP, 12'hfff); send(4'h9, 12'hfff);
      chk(cfg.in_base == a && cfg.out_base == b, "bases");
      chk(cfg.width == w && cfg.height == h && cfg.channels == c, "sizes");
      chk(cfg.stride == (m[2:0] == 0 ? 3'd1 : m[2:0]) && cfg.pool_en == m[3] && cfg.pool3 == m[4]
          && cfg.in_sel == m[5] && cfg.mode1x1 == m[6], "mode");
      // the RUN is held until the host allows it
      @(negedge clk); cmd_valid = 1; cmd = {OP_RUN, 12'h0};
      repeat (3) begin @(negedge clk); chk(!cmd_ready && !busy, "RUN held without run_allowed"); end
      run_allowed = 1;
      @(posedge clk); #1 chk(start && run_taken, "run_taken with start");
      @(negedge clk); cmd_valid = 0; run_allowed = 0;
      chk(busy, "busy after RUN");
      // a command waiting while the layer runs must not be taken
      @(negedge clk); cmd_valid = 1; cmd = {OP_WIDTH, 12'h001};
      repeat (5) begin @(negedge clk); chk(!cmd_ready && cfg.width == w, "blocked while busy"); end
      done = 1; @(negedge clk); done = 0;
      while (!cmd_ready) @(negedge clk);
      @(negedge clk); cmd_valid = 0;
      chk(cfg.width == 12'h001 && !busy, "resumed after done");
    end
    chk(starts == 20, "one start per RUN");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
