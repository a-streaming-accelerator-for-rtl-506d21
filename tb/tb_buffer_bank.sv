// tb_buffer_bank -- self-checking test of the buffer bank.
// Fills both halves through the DRAM port, reads the input half through the
// datapath port for both settings of in_sel, writes the output half through
// the datapath while reading the input half in the same cycles, and reads
// the results back through the DRAM port. Checks one-cycle read latency.
module tb_buffer_bank;
  import cnn_pkg::*;
  logic clk = 0, in_sel = 0, rd_en = 0, wr_en = 0, ext_en = 0, ext_we = 0;
  logic [11:0] rd_addr = '0, wr_addr = '0;
  logic [12:0] ext_addr = '0;
  word_t rd_data, wr_data = '0, ext_wdata = '0, ext_rdata;
  word_t model [2][int];   // only written addresses are compared
  int checks = 0, failures = 0;

  buffer_bank dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic word_t rnd();
    return word_t'({$urandom, $urandom, $urandom, $urandom});
  endfunction

  initial begin
    int addrs[$];
    repeat (2) @(posedge clk);
    for (int i = 0; i < 400; i++) addrs.push_back($urandom % 4096);
    // fill through the DRAM port
    foreach (addrs[i]) for (int h = 0; h < 2; h++) begin
      @(negedge clk);
      ext_en = 1; ext_we = 1; ext_addr = {1'(h), 12'(addrs[i])}; ext_wdata = rnd();
      model[h][addrs[i]] = ext_wdata;
    end
    @(negedge clk); ext_en = 0; ext_we = 0;
    for (int s = 0; s < 2; s++) begin
      in_sel = 1'(s);
      // read input half, write output half in the same cycles
      foreach (addrs[i]) begin
        @(negedge clk);
        rd_en = 1; rd_addr = 12'(addrs[i]);
        wr_en = 1; wr_addr = 12'(addrs[(i + 7) % addrs.size()]) ^ 12'h800; wr_data = rnd();
        @(negedge clk);
        rd_en = 0; wr_en = 0;
        model[1 - s][int'(wr_addr)] = wr_data;
        checks++;
        if (rd_data !== model[s][addrs[i]]) begin failures++; $display("rd half %0d addr %0d", s, addrs[i]); end
      end
      // read back both halves through the DRAM port
      foreach (addrs[i]) for (int h = 0; h < 2; h++) begin
        logic [11:0] a;
        a = (i % 2 == 1) ? (12'(addrs[i]) ^ 12'h800) : 12'(addrs[i]);
        if (!model[h].exists(int'(a))) continue;
        @(negedge clk);
        ext_en = 1; ext_we = 0; ext_addr = {1'(h), a};
        @(negedge clk);
        ext_en = 0;
        checks++;
        if (ext_rdata !== model[h][int'(a)]) begin failures++; $display("ext half %0d addr %0d", h, a); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
