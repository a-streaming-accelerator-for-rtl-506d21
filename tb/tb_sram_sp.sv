// tb_sram_sp -- self-checking test of the single-port SRAM macro model.
// Writes random words to random addresses, reads them back and checks the
// one-cycle read latency and that rdata holds while the macro is idle.
module tb_sram_sp;
  logic clk = 0, ce = 0, we = 0;
  logic [9:0] addr = '0;
  logic [127:0] wdata = '0, rdata;
  logic [127:0] model [1024];
  logic [1023:0] written = '0;
  int checks = 0, failures = 0;

  sram_sp dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      ce = 1; we = 1; addr = 10'($urandom); wdata = {$urandom, $urandom, $urandom, $urandom};
      model[addr] = wdata; written[addr] = 1'b1;
    end
    for (int i = 0; i < 600; i++) begin
      logic [9:0] a;
      @(negedge clk);
      a = 10'($urandom);
      if (!written[a]) continue;
      ce = 1; we = 0; addr = a;
      @(negedge clk);
      ce = 0;
      checks++;
      if (rdata !== model[a]) begin
        failures++; $display("read %0d: got %h exp %h", a, rdata, model[a]);
      end
      // idle cycle: value held
      @(negedge clk);
      checks++;
      if (rdata !== model[a]) begin failures++; $display("hold failed at %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
