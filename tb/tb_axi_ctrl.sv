// tb_axi_ctrl -- self-checking test of the AXI4-Lite control slave.
// A host model writes and reads the registers with random handshake delays
// while the core side takes RUNs and reports passes. A reference model of
// auto_run, the credits and the pass counter checks every read, the
// run_credit output and that responses hold until they are accepted.
module tb_axi_ctrl;
  logic clk = 0, rst_n = 0;
  logic awvalid = 0, awready, wvalid = 0, wready, bvalid, bready = 0;
  logic arvalid = 0, arready, rvalid, rready = 0;
  logic [3:0] awaddr = '0, araddr = '0;
  logic [15:0] wdata = '0, rdata;
  logic [1:0] bresp, rresp;
  logic auto_run, run_credit, run_taken = 0, busy = 0, loader_done = 0, pass_done = 0;
  logic [7:0] fifo_count = '0;
  int checks = 0, failures = 0;
  int m_credits = 0, m_passes = 0;
  logic m_auto = 0;

  axi_ctrl dut (.*);
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

  task automatic axi_write(input logic [3:0] a, input logic [15:0] d);
    @(negedge clk);
    awvalid = 1; awaddr = a; wvalid = 1; wdata = d;
    @(posedge clk);
    while (!(awready && wready)) @(posedge clk);
    if (a[3:1] == 3'd0) m_auto = d[0];
    if (a[3:1] == 3'd1 && m_credits < 255) m_credits++;
    @(negedge clk);
    awvalid = 0; wvalid = 0;
    chk(bvalid && bresp == 2'b00, "write response");
    repeat ($urandom % 3) begin @(negedge clk); chk(bvalid, "bvalid held"); end
    bready = 1;
    @(negedge clk);
    bready = 0;
    chk(!bvalid, "bvalid dropped");
  endtask

  task automatic axi_read(input logic [3:0] a, output logic [15:0] d);
    @(negedge clk);
    arvalid = 1; araddr = a;
    @(posedge clk);
    while (!arready) @(posedge clk);
    @(negedge clk);
    arvalid = 0;
    chk(rvalid && rresp == 2'b00, "read response");
    d = rdata;
    repeat ($urandom % 3) begin @(negedge clk); chk(rvalid && rdata == d, "rdata held"); end
    rready = 1;
    @(negedge clk);
    rready = 0;
  endtask

  initial begin
    logic [15:0] d;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      int k;
      k = $urandom % 6;
      busy = 1'($urandom); loader_done = 1'($urandom); fifo_count = 8'($urandom);
      case (k)
        0: axi_write(4'h0, 16'($urandom));
        1, 2: axi_write(4'h2, 16'($urandom));
        3: begin axi_read(4'h0, d); chk(d == {15'b0, m_auto}, "CTRL read"); end
        4: begin axi_read(4'h2, d); chk(d == 16'(m_credits), "START read"); end
        default: begin
          axi_read(4'h4, d); chk(d == {fifo_count, 6'b0, loader_done, busy}, "STATUS read");
          axi_read(4'h6, d); chk(d == 16'(m_passes), "PASSES read");
        end
      endcase
      chk(auto_run == m_auto && run_credit == (m_credits != 0), "core outputs");
      // the core takes a RUN now and then
      if (run_credit && $urandom % 2 == 0) begin
        @(negedge clk); run_taken = 1; pass_done = 1;
        @(negedge clk); run_taken = 0; pass_done = 0;
        m_credits--; m_passes++;
      end
    end
    chk(m_passes > 50, "enough passes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
