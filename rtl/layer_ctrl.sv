// layer_ctrl -- sequencer for one convolution pass (one tile, two features).
//
// On start it streams the input tile out of the Layer_input half, one word
// per cycle, in the order channel > band > column; the words of a tile are
// stored contiguously from in_base in that same order, so the read address
// simply counts up. Each read carries a tag (band, column, first channel,
// weight update) that travels down the pipeline with the data. The stream
// does not pause at band or channel boundaries: W x ceil(H/8) x C words take
// exactly that many cycles.
//
// Weights: the first word of every channel is tagged upd, which makes the
// CUs swap in their pre-fetched coefficients just as that word enters them.
// Before issuing it the controller checks weights_ready (every CU's shadow
// registers are full); if not, it stalls (stall high) and wreq asks the
// weight DMA for the next set. After the last word it waits for the pipeline
// to drain, then starts pooling (if enabled) and the write-back in the
// accumulation buffer, and pulses done when the result is in the output half.
// Follows the paper's streaming flow (Sec. 3, Sec. 4.2); the loop order,
// layout and handshakes are this design's choices.
module layer_ctrl
  import cnn_pkg::*;
#(
  parameter int DRAIN = 6          // cycles from the last read to the last accumulation
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  layer_cfg_t         cfg,
  input  logic               weights_ready,
  input  logic               acc_busy,
  output logic               rd_en,
  output logic [HALF_AW-1:0] rd_addr,
  output tag_t               tag,
  output logic [BAND_W-1:0]  nbands,
  output logic               acc_start_pool,
  output logic               acc_start_wb,
  output logic               busy,
  output logic               stall,
  output logic               wreq,
  output logic               done
);
  typedef enum logic [2:0] {S_IDLE, S_STREAM, S_DRAIN, S_POOL, S_WB, S_WAIT, S_DONE} state_t;
  state_t state, after_wait;

  logic [HALF_AW-1:0] addr;
  logic [DIM_W-1:0]   ch;
  logic [BAND_W-1:0]  b;
  logic [COL_W-1:0]   c;
  logic [3:0]         cnt;
  logic               ch_start, last_word;

  assign nbands    = BAND_W'((cfg.height + DIM_W'(7)) >> 3);
  assign ch_start  = (b == '0) && (c == '0);
  assign last_word = (c == COL_W'(cfg.width - 1'b1)) && (b == nbands - 1'b1) &&
                     (ch == cfg.channels - 1'b1);
  assign stall     = (state == S_STREAM) && ch_start && !weights_ready;
  assign wreq      = !weights_ready;
  assign busy      = (state != S_IDLE);

  always_comb begin
    rd_en        = (state == S_STREAM) && !stall;
    rd_addr      = addr;
    tag          = '0;
    tag.valid    = rd_en;
    tag.upd      = ch_start;
    tag.first_ch = (ch == '0);
    tag.band     = b;
    tag.col      = c;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; after_wait <= S_IDLE;
      addr <= '0; ch <= '0; b <= '0; c <= '0; cnt <= '0;
      acc_start_pool <= 1'b0; acc_start_wb <= 1'b0; done <= 1'b0;
    end else begin
      acc_start_pool <= 1'b0;
      acc_start_wb   <= 1'b0;
      done           <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          state <= S_STREAM;
          addr <= cfg.in_base; ch <= '0; b <= '0; c <= '0;
        end
        S_STREAM: if (rd_en) begin
          addr <= addr + 1'b1;
          if (last_word) begin
            state <= S_DRAIN; cnt <= 4'(DRAIN);
          end else if (c == COL_W'(cfg.width - 1'b1)) begin
            c <= '0;
            if (b == nbands - 1'b1) begin
              b <= '0; ch <= ch + 1'b1;
            end else b <= b + 1'b1;
          end else c <= c + 1'b1;
        end
        S_DRAIN: begin
          if (cnt != '0) cnt <= cnt - 1'b1;
          else if (cfg.pool_en) begin
            acc_start_pool <= 1'b1; state <= S_WAIT; after_wait <= S_POOL; cnt <= 4'd1;
          end else begin
            acc_start_wb <= 1'b1; state <= S_WAIT; after_wait <= S_WB; cnt <= 4'd1;
          end
        end
        // let acc_busy rise before looking at it
        S_WAIT: begin
          if (cnt != '0) cnt <= cnt - 1'b1;
          else if (!acc_busy) begin
            if (after_wait == S_POOL) begin
              acc_start_wb <= 1'b1; after_wait <= S_WB; cnt <= 4'd1;
            end else state <= S_DONE;
          end
        end
        S_DONE: begin
          done <= 1'b1; state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_cfg_sane: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE && start) |-> (cfg.width >= 3 && cfg.height >= 1 && cfg.channels >= 1));
endmodule
