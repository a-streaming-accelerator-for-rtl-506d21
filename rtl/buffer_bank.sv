// buffer_bank -- the 128 KB on-chip buffer bank (Layer_input / Layer_Output).
//
// Eight 16 KB single-port macros (sram_sp) form two 64 KB halves of four
// macros. One half holds the current layer's input tile and is read by the
// streaming datapath (one 128-bit word per cycle); the other receives the
// finished output feature maps. in_sel names the input half, so swapping it
// between layers makes one layer's output the next layer's input. Because the
// read and the write always go to different halves, each macro sees at most
// one access per cycle and a single port suffices.
//
// A third port serves the off-chip DRAM side (ext_*): address bit 12 selects
// the half. It has priority over the datapath; the controller only grants it
// while no layer runs, and an assertion checks that the two never collide.
// Read latency is one cycle on both read ports. The split into halves and the
// priority rule are this design's choices; the paper gives the capacity, the
// 16-byte width and the single-port macros.
module buffer_bank
  import cnn_pkg::*;
#(
  parameter int MACROS      = 8,
  parameter int MACRO_DEPTH = 1024,
  localparam int MAW        = $clog2(MACRO_DEPTH),
  localparam int PER_HALF   = MACROS / 2,
  localparam int SEL_W      = $clog2(PER_HALF),
  localparam int AW         = MAW + SEL_W          // word address in one half
) (
  input  logic          clk,
  input  logic          in_sel,
  // datapath read of the input half
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output word_t         rd_data,
  // datapath write of the output half
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  word_t         wr_data,
  // DRAM-side port, ext_addr[AW] selects the half
  input  logic          ext_en,
  input  logic          ext_we,
  input  logic [AW:0]   ext_addr,
  input  word_t         ext_wdata,
  output word_t         ext_rdata
);
  logic [WORD_W-1:0] q [MACROS];
  logic [SEL_W:0] rd_sel_q, ext_sel_q;   // {half, macro} of the last reads

  for (genvar m = 0; m < MACROS; m++) begin : g_macro
    localparam logic HALF = 1'(m / PER_HALF);
    localparam logic [SEL_W-1:0] IDX = SEL_W'(m % PER_HALF);
    logic ext_hit, rd_hit, wr_hit, ce, we;
    logic [MAW-1:0] addr;
    logic [WORD_W-1:0] wdata;

    always_comb begin
      ext_hit = ext_en && ext_addr[AW] == HALF && ext_addr[AW-1:MAW] == IDX;
      rd_hit  = rd_en  && in_sel == HALF    && rd_addr[AW-1:MAW] == IDX;
      wr_hit  = wr_en  && in_sel == !HALF   && wr_addr[AW-1:MAW] == IDX;
      ce      = ext_hit || rd_hit || wr_hit;
      we      = ext_hit ? ext_we : wr_hit;
      addr    = ext_hit ? ext_addr[MAW-1:0] : (rd_hit ? rd_addr[MAW-1:0] : wr_addr[MAW-1:0]);
      wdata   = ext_hit ? ext_wdata : wr_data;
    end

    sram_sp #(.DEPTH(MACRO_DEPTH), .WIDTH(WORD_W)) u_sram (
      .clk, .ce, .we, .addr, .wdata, .rdata(q[m])
    );

    // The DRAM port may not take a macro the datapath is using.
    a_no_collision: assert property (@(posedge clk) ext_hit |-> !(rd_hit || wr_hit));
  end

  always_ff @(posedge clk) begin
    if (rd_en)  rd_sel_q  <= {in_sel, rd_addr[AW-1:MAW]};
    if (ext_en) ext_sel_q <= ext_addr[AW:MAW];
  end

  assign rd_data   = word_t'(q[rd_sel_q]);
  assign ext_rdata = word_t'(q[ext_sel_q]);
endmodule
