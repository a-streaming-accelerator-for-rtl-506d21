// cu -- 3x3 convolution unit (nine PEs, adder, weight pre-fetch, stride logic).
//
// Data path: the input MUX feeds PE row r with Data_in<r> (3x3 mode) or all
// three rows with Data_in<2> (1x1 mode). Each PE row is a chain of three PEs
// linked by flip-flops, so while column c enters PE(r,0), PE(r,1) and PE(r,2)
// hold columns c-1 and c-2. Coefficient W[i][j] is therefore placed in
// PE(i,2-j), and the adder's sum over all nine products is the 3x3
// correlation of the window whose left column is c-2. The adder adds the bias
// (only when the word belongs to the first channel), drops FRAC_W fraction
// bits and saturates to the 16-bit PSUM. PSUM (1x1) is PE(2,0)'s product,
// i.e. W[2][2] times the newest pixel of the group, scaled the same way.
//
// Control: the bus decoder accepts writes on the FC&Control bus whose address
// bits [7:4] equal CU_ID; bits [3:0] select coefficient 0..8 (W[i][j] at
// 3i+j) or 9 (bias). Writes land in a shadow (pre-fetch) copy; shadow_full
// goes high once all ten have been written. filt_update copies the shadow to
// the PEs in one cycle and empties it, so the next channel's weights can be
// loaded while the current one streams. The stride counter counts columns of
// the band: EN_Ctrl is high only on columns that complete a window the
// stride keeps (and only if the row is kept, row_en), and psum_valid follows
// two cycles later.
//
// The structure follows the paper's Fig. 4. Bus encoding, Q7.8 format,
// saturation, the 1x1 tap and the two-cycle latency are this design's choices.
module cu
  import cnn_pkg::*;
#(
  parameter logic [3:0] CU_ID = 4'd0
) (
  input  logic        clk,
  input  logic        rst_n,
  // FC&Control bus
  input  logic        bus_valid,
  input  logic [7:0]  bus_addr,
  input  pix_t        bus_data,
  input  logic        filt_update,
  output logic        shadow_full,
  // configuration
  input  logic [2:0]  stride,
  input  logic        mode1x1,
  // data
  input  logic        in_valid,
  input  logic [COL_W-1:0] in_col,
  input  logic        in_first_ch,
  input  logic        row_en,
  input  group_t      data_in,
  output pix_t        psum,        // PSUM (3x3 conv)
  output pix_t        psum1,       // PSUM (1x1 conv)
  output logic        psum_valid,
  output logic        win          // this column completes a kept window
);
  localparam int NCOEF = 10;

  // ---------------- bus decoder and filter coefficient registers
  pix_t shadow [NCOEF];
  pix_t active [NCOEF];
  logic [NCOEF-1:0] written;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      written <= '0;
      for (int k = 0; k < NCOEF; k++) begin
        shadow[k] <= '0;
        active[k] <= '0;
      end
    end else begin
      if (filt_update) begin
        for (int k = 0; k < NCOEF; k++) active[k] <= shadow[k];
      end
      for (int k = 0; k < NCOEF; k++) begin
        if (bus_valid && bus_addr[7:4] == CU_ID && bus_addr[3:0] == 4'(k)) begin
          shadow[k]  <= bus_data;
          written[k] <= 1'b1;
        end else if (filt_update) begin
          written[k] <= 1'b0;
        end
      end
    end
  end
  assign shadow_full = &written;

  // ---------------- stride counting (EN_Ctrl)
  // scnt is (column - off) mod stride; a band restarts it at column off.
  logic [1:0] scnt, scnt_eff;
  logic [COL_W-1:0] off;
  logic col_en, en_ctrl;
  assign off      = mode1x1 ? '0 : COL_W'(2);
  assign scnt_eff = (in_col == off) ? 2'd0 : scnt;
  assign col_en   = (in_col >= off) && (scnt_eff == 2'd0);
  assign en_ctrl  = in_valid && col_en && row_en;
  assign win      = in_valid && col_en;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) scnt <= '0;
    else if (in_valid) begin
      if (in_col < off || scnt_eff == 2'(stride - 3'd1)) scnt <= 2'd0;
      else                                               scnt <= scnt_eff + 2'd1;
    end
  end

  // ---------------- input MUX and the PE array
  pix_t row_in [3];
  always_comb begin
    for (int r = 0; r < 3; r++) row_in[r] = mode1x1 ? data_in[2] : data_in[r];
  end

  logic signed [2*DATA_W-1:0] prod [3][3];
  pix_t chain [3][4];
  for (genvar r = 0; r < 3; r++) begin : g_row
    assign chain[r][0] = row_in[r];
    for (genvar j = 0; j < 3; j++) begin : g_col
      pe #(.DATA_W(DATA_W)) u_pe (
        .clk, .rst_n,
        .shift  (in_valid),
        .en_ctrl(en_ctrl),
        .din    (chain[r][j]),
        .coef   (active[3*r + (2-j)]),
        .dout   (chain[r][j+1]),
        .prod   (prod[r][j])
      );
    end
  end

  // ---------------- adder
  // The bias is captured with the products so a weight swap right after
  // the last column of a channel cannot change it.
  logic v1;
  pix_t bias1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; bias1 <= '0;
    end else begin
      v1 <= in_valid && col_en;
      if (in_valid && col_en) bias1 <= in_first_ch ? active[9] : '0;
    end
  end

  logic signed [39:0] sum, sum1, bias_term;
  always_comb begin
    bias_term = 40'(bias1) <<< FRAC_W;
    sum = bias_term;
    for (int r = 0; r < 3; r++)
      for (int j = 0; j < 3; j++) sum += 40'(prod[r][j]);
    sum1 = bias_term + 40'(prod[2][0]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      psum <= '0; psum1 <= '0; psum_valid <= 1'b0;
    end else begin
      psum_valid <= v1;
      if (v1) begin
        psum  <= sat16(sum  >>> FRAC_W);
        psum1 <= sat16(sum1 >>> FRAC_W);
      end
    end
  end
endmodule
