// cnn_accel_top -- streaming CNN convolution/pooling accelerator.
//
// Data flow (one word = one column of eight rows, 128 bits, per cycle):
//   buffer_bank (Layer_input half) -> col_buffer -> cu_engine_array (16 CUs)
//   -> accu_buffer (partial sums, max pooling) -> buffer_bank (Layer_Output)
// After reset cmd_loader fetches the command list from DRAM (cmd_mem_*) into
// a 128-deep FIFO; instr_decoder turns the commands into a layer
// configuration and RUN pulses, a RUN starting only when the host allows it
// through the 16-bit AXI4-Lite control slave (axi_*: start credits or
// auto-run, status); layer_ctrl streams the tile and sequences
// pooling and write-back. Filter weights and biases arrive from the DRAM side
// on the weight bus (wbus_*) into the CUs' pre-fetch registers; wreq asks for
// the next channel's set. The DRAM/DMA side reaches the buffer bank through
// ext_*, allowed only while ext_ready (no layer running).
// Pipeline: read issued at T, SRAM data at T+1, column-buffer groups at T+2,
// PSUMs at T+4, accumulated in the scratchpad at the end of T+4.
// The block structure follows the paper's Fig. 3; the port protocol is this
// design's own.
module cnn_accel_top
  import cnn_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // DRAM read port for the command list
  output logic                 cmd_mem_req,
  input  logic                 cmd_mem_gnt,
  output logic [23:0]          cmd_mem_addr,
  input  logic                 cmd_mem_rvalid,
  input  logic [15:0]          cmd_mem_rdata,
  // 16-bit AXI4-Lite control slave
  input  logic                 axi_awvalid,
  output logic                 axi_awready,
  input  logic [3:0]           axi_awaddr,
  input  logic                 axi_wvalid,
  output logic                 axi_wready,
  input  logic [15:0]          axi_wdata,
  output logic                 axi_bvalid,
  input  logic                 axi_bready,
  output logic [1:0]           axi_bresp,
  input  logic                 axi_arvalid,
  output logic                 axi_arready,
  input  logic [3:0]           axi_araddr,
  output logic                 axi_rvalid,
  input  logic                 axi_rready,
  output logic [15:0]          axi_rdata,
  output logic [1:0]           axi_rresp,
  // weight / bias bus from the DRAM side
  input  logic                 wbus_valid,
  input  logic [7:0]           wbus_addr,
  input  logic [15:0]          wbus_data,
  output logic                 wreq,
  // DRAM-side port of the buffer bank
  input  logic                 ext_en,
  input  logic                 ext_we,
  input  logic [HALF_AW:0]     ext_addr,
  input  word_t                ext_wdata,
  output word_t                ext_rdata,
  output logic                 ext_ready,
  // status
  output logic                 busy,
  output logic                 stall,
  output logic                 layer_done
);
  // command path
  logic        l_valid, l_ready, loader_done;
  logic [15:0] l_data;
  logic        f_valid, f_ready;
  logic [15:0] f_data;
  logic [7:0]  f_count;
  layer_cfg_t  cfg;
  logic        start, dec_busy, auto_run, run_credit, run_taken;

  cmd_loader u_loader (
    .clk, .rst_n,
    .mem_req(cmd_mem_req), .mem_gnt(cmd_mem_gnt), .mem_addr(cmd_mem_addr),
    .mem_rvalid(cmd_mem_rvalid), .mem_rdata(cmd_mem_rdata),
    .out_valid(l_valid), .out_ready(l_ready), .out_data(l_data), .done(loader_done)
  );

  cmd_fifo #(.DEPTH(128), .WIDTH(16)) u_fifo (
    .clk, .rst_n,
    .in_valid(l_valid), .in_ready(l_ready), .in_data(l_data),
    .out_valid(f_valid), .out_ready(f_ready), .out_data(f_data), .count(f_count)
  );

  instr_decoder u_dec (
    .clk, .rst_n,
    .cmd_valid(f_valid), .cmd_ready(f_ready), .cmd(f_data),
    .run_allowed(auto_run || run_credit), .run_taken,
    .cfg, .start, .done(layer_done), .busy(dec_busy)
  );

  axi_ctrl u_axi (
    .clk, .rst_n,
    .awvalid(axi_awvalid), .awready(axi_awready), .awaddr(axi_awaddr),
    .wvalid(axi_wvalid), .wready(axi_wready), .wdata(axi_wdata),
    .bvalid(axi_bvalid), .bready(axi_bready), .bresp(axi_bresp),
    .arvalid(axi_arvalid), .arready(axi_arready), .araddr(axi_araddr),
    .rvalid(axi_rvalid), .rready(axi_rready), .rdata(axi_rdata), .rresp(axi_rresp),
    .auto_run, .run_credit, .run_taken,
    .busy, .loader_done, .fifo_count(f_count), .pass_done(layer_done)
  );

  // controller
  logic               rd_en, all_full, acc_busy, start_pool, start_wb, ctrl_busy;
  logic [HALF_AW-1:0] rd_addr;
  tag_t               tag, tag_q;
  logic [BAND_W-1:0]  nbands;

  layer_ctrl u_ctrl (
    .clk, .rst_n, .start, .cfg,
    .weights_ready(all_full), .acc_busy,
    .rd_en, .rd_addr, .tag, .nbands,
    .acc_start_pool(start_pool), .acc_start_wb(start_wb),
    .busy(ctrl_busy), .stall, .wreq, .done(layer_done)
  );

  // buffer bank
  word_t              rd_data, wr_data;
  logic               wr_en;
  logic [HALF_AW-1:0] wr_addr;

  buffer_bank u_bank (
    .clk, .in_sel(cfg.in_sel),
    .rd_en, .rd_addr, .rd_data,
    .wr_en, .wr_addr, .wr_data,
    .ext_en, .ext_we, .ext_addr, .ext_wdata, .ext_rdata
  );

  // the tag follows the SRAM read latency
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tag_q <= '0;
    else        tag_q <= tag;
  end

  // column buffer
  tag_t               cb_tag;
  group_t [LANES-1:0] cb_data;

  col_buffer u_colbuf (
    .clk, .rst_n, .in_tag(tag_q), .in_data(rd_data),
    .out_tag(cb_tag), .out_data(cb_data)
  );

  // CU engine array; weights swap one cycle before the channel's first word
  // reaches the CUs
  logic               pv, pfirst;
  logic [BAND_W-1:0]  pband;
  logic [COL_W-1:0]   pocol;
  pix_t [NUM_CU-1:0]  psum;

  cu_engine_array u_cua (
    .clk, .rst_n,
    .bus_valid(wbus_valid), .bus_addr(wbus_addr), .bus_data(pix_t'(wbus_data)),
    .filt_update(tag_q.valid && tag_q.upd), .all_full,
    .stride(cfg.stride), .mode1x1(cfg.mode1x1),
    .in_tag(cb_tag), .in_data(cb_data),
    .out_valid(pv), .out_band(pband), .out_ocol(pocol), .out_first_ch(pfirst),
    .psum
  );

  // accumulation buffer with pooling
  accu_buffer u_acc (
    .clk, .rst_n, .cfg, .nbands,
    .psum_valid(pv), .psum_band(pband), .psum_ocol(pocol), .psum_first_ch(pfirst),
    .psum,
    .start_pool, .start_wb, .busy(acc_busy),
    .wr_en, .wr_addr, .wr_data
  );

  assign ext_ready = !ctrl_busy;
  assign busy      = ctrl_busy || dec_busy;

  a_ext_idle: assert property (@(posedge clk) disable iff (!rst_n) ext_en |-> !ctrl_busy);
endmodule
