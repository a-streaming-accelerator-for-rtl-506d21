// pe -- processing engine of a 3x3 convolution unit.
//
// Multiplies the pixel at its input by its filter coefficient and, through a
// D flip-flop, passes the pixel on to the next PE of its row, so a row of
// three PEs holds three consecutive columns. When shift is high a new pixel is
// accepted; the product is computed only when en_ctrl (EN_Ctrl) is also high,
// which the CU drops on columns a strided convolution does not need, to save
// power. The product register keeps its value otherwise. Both outputs are
// registered: dout and prod change one cycle after din is sampled.
// Follows the paper's Fig. 4; the registered product is this design's choice.
module pe #(
  parameter int DATA_W = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       shift,
  input  logic                       en_ctrl,
  input  logic signed [DATA_W-1:0]   din,
  input  logic signed [DATA_W-1:0]   coef,
  output logic signed [DATA_W-1:0]   dout,
  output logic signed [2*DATA_W-1:0] prod
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dout <= '0;
      prod <= '0;
    end else if (shift) begin
      dout <= din;
      if (en_ctrl) prod <= din * coef;
    end
  end
endmodule
