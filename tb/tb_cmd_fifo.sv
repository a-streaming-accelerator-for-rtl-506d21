// tb_cmd_fifo -- self-checking test of the 128-deep command FIFO.
// Fills it to full (checks in_ready drops after exactly 128 words), drains
// it, then runs random pushes and pops against a queue model.
module tb_cmd_fifo;
  logic clk = 0, rst_n = 0, in_valid = 0, out_ready = 0;
  logic in_ready, out_valid;
  logic [15:0] in_data = '0, out_data;
  logic [7:0] count;
  logic [15:0] q[$];
  int checks = 0, failures = 0;

  cmd_fifo dut (.*);
  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step();
    @(posedge clk);
    if (in_valid && in_ready) q.push_back(in_data);
    if (out_valid && out_ready) begin
      logic [15:0] e;
      e = q.pop_front();
      checks++;
      if (out_data !== e) begin failures++; $display("pop got %h exp %h", out_data, e); end
    end
    #1;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1;
    checks++; if (out_valid) begin failures++; $display("not empty after reset"); end
    for (int i = 0; i < 130; i++) begin
      in_valid = 1; in_data = 16'($urandom);
      checks++;
      if (in_ready !== (i < 128)) begin failures++; $display("in_ready wrong at %0d", i); end
      step();
    end
    in_valid = 0;
    checks++; if (count != 128) begin failures++; $display("count %0d", count); end
    out_ready = 1;
    while (out_valid) step();
    checks++; if (q.size() != 0) begin failures++; $display("words lost"); end
    for (int i = 0; i < 2000; i++) begin
      in_valid = ($urandom % 2) == 0; in_data = 16'($urandom);
      out_ready = ($urandom % 3) != 0;
      step();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
