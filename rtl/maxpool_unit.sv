// maxpool_unit -- one max-pool unit: a four-input comparator with feedback.
//
// Each valid cycle brings one column of a pooling window: up to three rows on
// i0..i2 (rows a window does not use are driven with the most negative
// value). The comparator's fourth input is the feedback register, which holds
// the running maximum of the earlier columns of the window; on the window's
// first column it is ignored. On the window's last column out_en (Output_EN)
// is high and out carries the maximum of the whole window, in the same cycle.
// The register is updated on every valid cycle.
// Structure from the paper's Fig. 5; signed comparison and the combinational
// output are this design's choices.
module maxpool_unit
  import cnn_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  logic first,     // first column of the window
  input  logic last,      // last column of the window
  input  pix_t i0,
  input  pix_t i1,
  input  pix_t i2,
  output logic out_en,
  output pix_t out
);
  pix_t fb, m;

  always_comb begin
    m = max2(max2(i0, i1), max2(i2, first ? PIX_MIN : fb));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        fb <= PIX_MIN;
    else if (in_valid) fb <= m;
  end

  assign out    = m;
  assign out_en = in_valid && last;
endmodule
