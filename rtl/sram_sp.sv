// sram_sp -- one 16 KB single-port SRAM macro of the buffer bank.
//
// The chip builds its 128 KB buffer bank from eight 16 KB single-port macros
// produced by a memory compiler. This module is a plain synchronous RAM with
// the same behaviour: one access per cycle, selected by ce; we=1 writes wdata
// at addr, we=0 reads addr and rdata shows the word on the next cycle and
// holds it until the next read. 1024 x 128 bit is this design's choice of
// aspect ratio, matching the 16-byte SRAM word. Contents are not reset.
module sram_sp #(
  parameter int DEPTH = 1024,
  parameter int WIDTH = 128,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             ce,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (ce) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
