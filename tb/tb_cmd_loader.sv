// tb_cmd_loader -- self-checking test of the command loader.
// A DRAM model with random grant and data latency holds a command list
// that ends with END and is followed by words that must not be fetched. The
// FIFO side takes words with a random ready. The test checks the words in
// order, that the loader stops after END with done high, and that it asks
// for no word past END.
module tb_cmd_loader;
  import cnn_pkg::*;
  localparam int N = 300;
  localparam logic [23:0] BASE = 24'h001234;
  logic clk = 0, rst_n = 0;
  logic mem_req, mem_gnt = 0, mem_rvalid = 0, out_valid, out_ready = 0, done;
  logic [23:0] mem_addr;
  logic [15:0] mem_rdata = '0, out_data;
  logic [15:0] list [N + 4];
  int checks = 0, failures = 0, got = 0, max_addr = 0;

  cmd_loader #(.CMD_BASE(BASE)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // DRAM
  initial begin
    forever begin
      @(negedge clk);
      mem_rvalid = 0;
      mem_gnt = mem_req && ($urandom % 3 == 0);
      if (mem_gnt) begin
        int a;
        a = int'(mem_addr - BASE);
        if (a > max_addr) max_addr = a;
        repeat (1 + $urandom % 4) @(negedge clk);
        mem_gnt = 0; mem_rvalid = 1;
        mem_rdata = (a >= 0 && a < N + 4) ? list[a] : 16'hDEAD;
      end
    end
  end

  // FIFO side
  always @(negedge clk) out_ready = ($urandom % 4 != 0);
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    chk(got < N && out_data == list[got], "word in order");
    got++;
  end

  initial begin
    for (int i = 0; i < N + 4; i++) begin
      logic [3:0] op;
      op = 4'($urandom % 14);          // anything but END and RUN-free is fine
      if (op == OP_END) op = OP_NOP;
      list[i] = {op, 12'($urandom)};
    end
    list[N - 1] = {OP_END, 12'h0};
    repeat (2) @(posedge clk);
    rst_n = 1;
    chk(!done, "not done after reset");
    while (!done) @(negedge clk);
    repeat (50) @(negedge clk);
    chk(got == N, "all words up to END");
    chk(max_addr == N - 1, "nothing fetched past END");
    chk(done && !mem_req && !out_valid, "idle when done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
