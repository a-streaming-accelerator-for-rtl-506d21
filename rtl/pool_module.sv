// pool_module -- reconfigurable streaming max pooling over the scratchpad rows.
//
// Input: one scratchpad word per cycle, i.e. one column of the eight rows
// R0..R7 of a band of one output feature, plus row_valid (rows that hold real
// convolution outputs). Pool windows are 2x2 or 3x3 (cfg_pool3) with a
// pooling stride equal to the window size. The input MUX keeps only the rows
// that carry data (with stride 2 only R0, R2, R4, R6) and packs them, in
// order, into windows of K rows, which go to up to four maxpool_units as
// I0..I2. The units scan K columns per window and then present the maximum.
//
// Windows need not line up with bands: K=3 does not divide 8, and stride 2
// leaves 3 valid rows in the first band. A window whose rows continue in the
// next band is finished over its K columns as far as it goes and its partial
// maximum is stored per pooled column in the internal buffer (carry buffer).
// In the next band the first window is merged with that stored value. phase
// (0..K-1) is the number of rows the open window already holds.
//
// Output (registered, one cycle after the window's last column): out_data
// lanes A0..A3 hold the windows completed in this band in row order,
// out_mask marks them; with four units, lanes A4..A7 are always zero. Columns that do not fill a whole window at the right
// edge, and a window still open at the end of the image, are dropped.
// The MUX / four units / internal buffer structure follows the paper's Fig.
// 5; the packing rule, the carry scheme and the floor behaviour are this
// design's choices.
module pool_module
  import cnn_pkg::*;
#(
  parameter int UNITS     = 4,
  parameter int MAX_PCOLS = 128
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cfg_stride2,
  input  logic             cfg_pool3,
  input  logic             start,        // new feature map: empty the carry
  input  logic             in_valid,
  input  logic             band_start,   // first column of a band
  input  logic [LANES-1:0] row_valid,
  input  word_t            in_data,
  output logic             out_valid,
  output word_t            out_data,
  output logic [LANES-1:0] out_mask
);
  localparam int PCW = $clog2(MAX_PCOLS);

  logic [1:0] k;
  logic [LANES-1:0] vmask;
  logic [3:0] n, n_prev, tot;
  logic [1:0] p_reg, p_eff, ccnt, ccnt_eff;
  logic [PCW-1:0] pcol, pcol_eff;
  logic first, last;
  pix_t cb [MAX_PCOLS];
  pix_t carry;

  assign k     = cfg_pool3 ? 2'd3 : 2'd2;
  assign vmask = row_valid & (cfg_stride2 ? 8'b0101_0101 : 8'hFF);

  always_comb begin
    logic [3:0] s;
    n = '0;
    for (int g = 0; g < LANES; g++) n += 4'(vmask[g]);
    s        = 4'(p_reg) + n_prev;
    p_eff    = band_start ? 2'(cfg_pool3 ? s % 4'd3 : s % 4'd2) : p_reg;
    ccnt_eff = band_start ? 2'd0 : ccnt;
    pcol_eff = band_start ? '0 : pcol;
    first    = (ccnt_eff == 2'd0);
    last     = (ccnt_eff == k - 2'd1);
    tot      = 4'(p_eff) + n;
  end
  assign carry = cb[pcol_eff];

  // input MUX: valid rows, packed into windows of k rows
  pix_t slot [UNITS][3];
  always_comb begin
    logic [3:0] pos;
    for (int u = 0; u < UNITS; u++)
      for (int s = 0; s < 3; s++) slot[u][s] = PIX_MIN;
    pos = 4'(p_eff);
    for (int g = 0; g < LANES; g++) begin
      if (vmask[g]) begin
        for (int u = 0; u < UNITS; u++)
          for (int s = 0; s < 3; s++)
            if (32'(pos) == u * 32'(k) + s && s < 32'(k)) slot[u][s] = in_data[g];
        pos = pos + 4'd1;
      end
    end
  end

  pix_t uout [UNITS];
  logic [UNITS-1:0] uen;
  for (genvar u = 0; u < UNITS; u++) begin : g_unit
    maxpool_unit u_mp (
      .clk, .rst_n, .in_valid, .first, .last,
      .i0(slot[u][0]), .i1(slot[u][1]), .i2(slot[u][2]),
      .out_en(uen[u]), .out(uout[u])
    );
  end

  // window bookkeeping, carry buffer and the output MUX
  always_ff @(posedge clk) begin
    if (in_valid && last && pcol_eff < PCW'(MAX_PCOLS - 1)) begin
      for (int u = 0; u < UNITS; u++) begin
        if (32'(tot) / 32'(k) == u && 32'(tot) % 32'(k) != 0)
          cb[pcol_eff] <= (u == 0 && p_eff != 0) ? max2(uout[u], carry) : uout[u];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_reg <= '0; n_prev <= '0; ccnt <= '0; pcol <= '0;
      out_valid <= 1'b0; out_data <= '0; out_mask <= '0;
    end else begin
      out_valid <= 1'b0;
      if (start) begin
        p_reg <= '0; n_prev <= '0; ccnt <= '0; pcol <= '0;
      end else if (in_valid) begin
        p_reg  <= p_eff;
        n_prev <= n;
        ccnt   <= last ? 2'd0 : ccnt_eff + 2'd1;
        pcol   <= last ? pcol_eff + 1'b1 : pcol_eff;
        if (last) begin
          out_valid <= 1'b1;
          out_data  <= '0;
          out_mask  <= '0;
          for (int u = 0; u < UNITS; u++) begin
            if ((u + 1) * 32'(k) <= 32'(tot) && uen[u]) begin
              out_data[u] <= (u == 0 && p_eff != 0) ? max2(uout[u], carry) : uout[u];
              out_mask[u] <= 1'b1;
            end
          end
        end
      end
    end
  end

  a_units: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> 32'(tot) < (UNITS + 1) * 32'(k));
endmodule
