// axi_ctrl -- 16-bit AXI4-Lite control slave of the accelerator.
//
// The host processor controls the accelerator over a 16-bit AXI bus. Four
// 16-bit registers (byte addresses):
//   0x0 CTRL    r/w  [0] auto_run: RUN commands start without host credit
//   0x2 START   r/w  a write adds one start credit (one RUN may start);
//                    reads return the credits not yet used
//   0x4 STATUS  r    [0] busy, [1] command list loaded, [15:8] FIFO words
//   0x6 PASSES  r    number of finished passes (wraps)
// Each channel has the usual valid/ready handshake. A write is taken when
// address and data are both valid (awready and wready rise together), and
// the response follows on the next cycle. A read answers one cycle after
// arvalid. At most one write and one read are outstanding. Responses are
// always OKAY; byte strobes are ignored (16-bit writes only).
// The paper gives only the bus width and that the host starts the
// computation through it; the register map is this design's own.
module axi_ctrl (
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave
  input  logic        awvalid,
  output logic        awready,
  input  logic [3:0]  awaddr,
  input  logic        wvalid,
  output logic        wready,
  input  logic [15:0] wdata,
  output logic        bvalid,
  input  logic        bready,
  output logic [1:0]  bresp,
  input  logic        arvalid,
  output logic        arready,
  input  logic [3:0]  araddr,
  output logic        rvalid,
  input  logic        rready,
  output logic [15:0] rdata,
  output logic [1:0]  rresp,
  // core side
  output logic        auto_run,
  output logic        run_credit,
  input  logic        run_taken,
  input  logic        busy,
  input  logic        loader_done,
  input  logic [7:0]  fifo_count,
  input  logic        pass_done
);
  logic [7:0]  credits;
  logic [15:0] passes;
  logic        wr, rd, add_credit;

  assign wr         = awvalid && wvalid && !bvalid;
  assign rd         = arvalid && !rvalid;
  assign awready    = wr;
  assign wready     = wr;
  assign arready    = rd;
  assign bresp      = 2'b00;
  assign rresp      = 2'b00;
  assign add_credit = wr && awaddr[3:1] == 3'd1;
  assign run_credit = (credits != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      auto_run <= 1'b0; credits <= '0; passes <= '0;
      bvalid <= 1'b0; rvalid <= 1'b0; rdata <= '0;
    end else begin
      if (bvalid && bready) bvalid <= 1'b0;
      if (rvalid && rready) rvalid <= 1'b0;
      if (wr) begin
        bvalid <= 1'b1;
        if (awaddr[3:1] == 3'd0) auto_run <= wdata[0];
      end
      credits <= credits + 8'(add_credit && credits != 8'hFF) - 8'(run_taken && credits != '0);
      if (pass_done) passes <= passes + 1'b1;
      if (rd) begin
        rvalid <= 1'b1;
        case (araddr[3:1])
          3'd0:    rdata <= {15'b0, auto_run};
          3'd1:    rdata <= {8'b0, credits};
          3'd2:    rdata <= {fifo_count, 6'b0, loader_done, busy};
          3'd3:    rdata <= passes;
          default: rdata <= '0;
        endcase
      end
    end
  end

  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n) bvalid && !bready |=> bvalid);
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n) rvalid && !rready |=> rvalid && $stable(rdata));
endmodule
