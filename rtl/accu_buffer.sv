// accu_buffer -- accumulation buffer: partial-sum scratchpad, pooling, write-back.
//
// For each of the NFEAT output features the scratchpad holds one word per
// (band, output column): the eight rows of that column side by side, so a
// whole column of a band is read or written at one address
// (address = band * out_cols + out_col). Lane g of band b is the output whose
// window starts at input row 8b+g-2 (3x3) or 8b+g (1x1).
//
// Phases:
//  * ACC (default): every psum_valid brings 16 CU results, eight rows of two
//    features. The word is read and written back in the same cycle: the
//    first input channel overwrites (the CUs already added the bias), later
//    channels add with 16-bit saturation. out_cols is learnt from band 0.
//  * POOL (start_pool): the scratchpad is read band by band through
//    pool_module, one feature after the other; pooled words are written back
//    into the same scratchpad, packed from address 0 (writes trail reads, so
//    nothing unread is overwritten).
//  * WB (start_wb): every word of feature 0 then feature 1 is copied to the
//    output half of the buffer bank at out_base + f * words + address, one
//    word per cycle.
// busy is high during POOL and WB. The phases and the layout are this
// design's choices; the paper says the block accumulates partial sums and
// pools, with the pooled output fed back to the scratchpad.
module accu_buffer
  import cnn_pkg::*;
#(
  parameter int SP_DEPTH  = 512,
  parameter int MAX_PCOLS = 128,
  localparam int SAW      = $clog2(SP_DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  layer_cfg_t         cfg,
  input  logic [BAND_W-1:0]  nbands,
  // partial sums from the CU engine array
  input  logic               psum_valid,
  input  logic [BAND_W-1:0]  psum_band,
  input  logic [COL_W-1:0]   psum_ocol,
  input  logic               psum_first_ch,
  input  pix_t [NUM_CU-1:0]  psum,
  // phase control
  input  logic               start_pool,
  input  logic               start_wb,
  output logic               busy,
  // write port to the Layer_Output half
  output logic               wr_en,
  output logic [HALF_AW-1:0] wr_addr,
  output word_t              wr_data
);
  typedef enum logic [2:0] {S_ACC, S_POOL, S_PDRAIN, S_WB} state_t;
  state_t state;

  word_t sp_acc [NFEAT];   // scratchpad word at acc_addr, per feature
  word_t sp_rd  [NFEAT];   // scratchpad word at ra, per feature

  logic [COL_W-1:0]  ocols;
  logic [SAW-1:0]    acc_addr;
  logic              f;            // feature being pooled / written back
  logic [BAND_W-1:0] b;
  logic [COL_W-1:0]  c;
  logic [SAW-1:0]    ra, wa, nwords, npool;
  logic [1:0]        drain;

  // ---------------- ACC
  assign acc_addr = SAW'(psum_band * ocols + BAND_W'(psum_ocol));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ocols <= '0;
    else if (state == S_ACC && psum_valid && psum_band == '0 && psum_first_ch)
      ocols <= psum_ocol + 1'b1;
  end

  // ---------------- POOL: row validity of band b and the pool module
  logic [LANES-1:0] row_valid;
  always_comb begin
    logic signed [DIM_W+1:0] t, tmax;
    tmax = $signed({2'b00, cfg.height}) - (cfg.mode1x1 ? (DIM_W+2)'(1) : (DIM_W+2)'(3));
    for (int g = 0; g < LANES; g++) begin
      t = $signed({2'b00, b, 3'b000}) + (DIM_W+2)'(g) - (cfg.mode1x1 ? (DIM_W+2)'(0) : (DIM_W+2)'(2));
      row_valid[g] = (t >= 0) && (t <= tmax);
      case (cfg.stride)
        3'd2:    row_valid[g] = row_valid[g] && !t[0];
        3'd3:    row_valid[g] = row_valid[g] && (t % 3 == 0);
        3'd4:    row_valid[g] = row_valid[g] && (t[1:0] == 2'b00);
        default: ;
      endcase
    end
  end

  logic  p_in_valid, p_out_valid;
  word_t p_out;
  logic [LANES-1:0] p_mask;   // lanes A0..A3 that hold a pooled window
  assign p_in_valid = (state == S_POOL);

  pool_module #(.MAX_PCOLS(MAX_PCOLS)) u_pool (
    .clk, .rst_n,
    .cfg_stride2(cfg.stride == 3'd2),
    .cfg_pool3  (cfg.pool3),
    .start      (start_pool || (state == S_PDRAIN && drain == 2'd0)),
    .in_valid   (p_in_valid),
    .band_start (c == '0),
    .row_valid,
    .in_data    (sp_rd[f]),
    .out_valid  (p_out_valid),
    .out_data   (p_out),
    .out_mask   (p_mask)
  );

  // ---------------- scratchpad: one memory per feature, one write port
  for (genvar ff = 0; ff < NFEAT; ff++) begin : g_sp
    word_t mem [SP_DEPTH];
    word_t acc_word;
    logic  we;
    logic [SAW-1:0] waddr;
    word_t wdata;

    assign sp_acc[ff] = mem[acc_addr];
    assign sp_rd[ff]  = mem[ra];

    always_comb begin
      for (int g = 0; g < LANES; g++)
        acc_word[g] = psum_first_ch ? psum[ff*LANES + g]
                    : sat16(40'(sp_acc[ff][g]) + 40'(psum[ff*LANES + g]));
      if (state == S_ACC && psum_valid) begin
        we = 1'b1; waddr = acc_addr; wdata = acc_word;
      end else begin
        we = p_out_valid && (f == 1'(ff)); waddr = wa; wdata = p_out;
      end
    end

    always_ff @(posedge clk) begin
      if (we) mem[waddr] <= wdata;
    end
  end

  // ---------------- phase sequencing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_ACC; f <= 1'b0; b <= '0; c <= '0; ra <= '0; wa <= '0;
      nwords <= '0; npool <= '0; drain <= '0;
      wr_en <= 1'b0; wr_addr <= '0; wr_data <= '0;
    end else begin
      wr_en <= 1'b0;
      if (p_out_valid) wa <= wa + 1'b1;
      case (state)
        S_ACC: begin
          if (start_pool) begin
            state <= S_POOL; f <= 1'b0; b <= '0; c <= '0; ra <= '0; wa <= '0;
          end else if (start_wb) begin
            state <= S_WB; f <= 1'b0; ra <= '0;
            nwords <= cfg.pool_en ? npool : SAW'(nbands * ocols);
          end
        end
        S_POOL: begin
          ra <= ra + 1'b1;
          if (c == ocols - 1'b1) begin
            c <= '0;
            if (b == nbands - 1'b1) begin
              state <= S_PDRAIN; drain <= 2'd2;
            end else b <= b + 1'b1;
          end else c <= c + 1'b1;
        end
        S_PDRAIN: begin
          if (drain != 2'd0) drain <= drain - 2'd1;
          else begin
            b <= '0; c <= '0; ra <= '0;
            if (f == 1'b0) begin
              f <= 1'b1; wa <= '0; state <= S_POOL;
            end else begin
              f <= 1'b0; npool <= wa; state <= S_ACC;
            end
          end
        end
        S_WB: begin
          wr_en   <= 1'b1;
          wr_addr <= cfg.out_base + HALF_AW'(f ? nwords : '0) + HALF_AW'(ra);
          wr_data <= sp_rd[f];
          if (ra == nwords - 1'b1) begin
            ra <= '0;
            if (f == 1'b0) f <= 1'b1;
            else state <= S_ACC;
          end else ra <= ra + 1'b1;
        end
        default: state <= S_ACC;
      endcase
    end
  end

  assign busy = (state != S_ACC);

  a_acc_range: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_ACC && psum_valid) |-> (32'(psum_band) * 32'(ocols) + 32'(psum_ocol) < SP_DEPTH));
endmodule
