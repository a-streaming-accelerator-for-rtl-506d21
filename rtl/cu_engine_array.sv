// cu_engine_array -- sixteen 3x3 convolution units working in lock step.
//
// The column buffer delivers eight 3-row groups per cycle (one per output row
// of the band). CU k takes group k mod 8 and holds the filter of output
// feature k div 8, so each cycle the array computes eight output rows of two
// output features, 16 x 9 = 144 multiplications. All CUs share the FC&Control
// bus (each decodes its own id) and the filter-update pulse.
//
// Row gating: the output row of group g in band b is t = 8b+g-2 (3x3) or
// 8b+g (1x1); CUs whose t is negative or not a multiple of the stride keep
// their multipliers off. The array also numbers the output columns of each
// band (ocol) and delays the tag to line up with the CUs' two-cycle latency.
// Outputs: psum[k] for every CU, valid for the whole array at once; rows the
// stride discards carry stale values.
// The CU count comes from the paper; the group/feature mapping is this
// design's choice (the paper does not say how 16 CUs share 8 groups).
module cu_engine_array
  import cnn_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  bus_valid,
  input  logic [7:0]            bus_addr,
  input  pix_t                  bus_data,
  input  logic                  filt_update,
  output logic                  all_full,
  input  logic [2:0]            stride,
  input  logic                  mode1x1,
  input  tag_t                  in_tag,
  input  group_t [LANES-1:0]    in_data,
  output logic                  out_valid,
  output logic [BAND_W-1:0]     out_band,
  output logic [COL_W-1:0]      out_ocol,
  output logic                  out_first_ch,
  output pix_t [NUM_CU-1:0]     psum
);
  logic [NUM_CU-1:0] full, pv, win;
  pix_t p3 [NUM_CU];
  pix_t p1 [NUM_CU];
  logic [LANES-1:0] row_en;

  // row gating from the band, group and stride
  always_comb begin
    for (int g = 0; g < LANES; g++) begin
      logic signed [BAND_W+4:0] t;
      t = $signed({2'b00, in_tag.band, 3'b000}) + (BAND_W+5)'(g) - (mode1x1 ? (BAND_W+5)'(0) : (BAND_W+5)'(2));
      case (stride)
        3'd2:    row_en[g] = (t >= 0) && (t[0] == 1'b0);
        3'd3:    row_en[g] = (t >= 0) && (t % 3 == 0);
        3'd4:    row_en[g] = (t >= 0) && (t[1:0] == 2'b00);
        default: row_en[g] = (t >= 0);
      endcase
    end
  end

  for (genvar k = 0; k < NUM_CU; k++) begin : g_cu
    cu #(.CU_ID(4'(k))) u_cu (
      .clk, .rst_n,
      .bus_valid, .bus_addr, .bus_data, .filt_update,
      .shadow_full(full[k]),
      .stride, .mode1x1,
      .in_valid   (in_tag.valid),
      .in_col     (in_tag.col),
      .in_first_ch(in_tag.first_ch),
      .row_en     (row_en[k % LANES]),
      .data_in    (in_data[k % LANES]),
      .psum       (p3[k]),
      .psum1      (p1[k]),
      .psum_valid (pv[k]),
      .win        (win[k])
    );
    assign psum[k] = mode1x1 ? p1[k] : p3[k];
  end
  assign all_full  = &full;
  assign out_valid = pv[0];

  // output column numbering and tag delay (matches the CU latency of 2)
  logic [COL_W-1:0] ocnt;
  logic [BAND_W-1:0] band_d [2];
  logic [COL_W-1:0]  ocol_d [2];
  logic              fch_d  [2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ocnt <= '0;
      for (int i = 0; i < 2; i++) begin
        band_d[i] <= '0; ocol_d[i] <= '0; fch_d[i] <= 1'b0;
      end
    end else begin
      if (in_tag.valid && in_tag.col == '0) ocnt <= '0;
      // a column that completes a kept window advances the output column
      if (win[0]) begin
        ocnt      <= (in_tag.col == '0 ? '0 : ocnt) + 1'b1;
        band_d[0] <= in_tag.band;
        ocol_d[0] <= (in_tag.col == '0) ? '0 : ocnt;
        fch_d[0]  <= in_tag.first_ch;
      end
      band_d[1] <= band_d[0];
      ocol_d[1] <= ocol_d[0];
      fch_d[1]  <= fch_d[0];
    end
  end
  assign out_band     = band_d[1];
  assign out_ocol     = ocol_d[1];
  assign out_first_ch = fch_d[1];
endmodule
