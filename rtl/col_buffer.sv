// col_buffer -- column buffer with a 2 x N row buffer (streaming remapper).
//
// Each cycle the SRAM delivers one column of a band: the eight pixels of rows
// 8i..8i+7 (lanes 0..7). A 3x3 window needs three consecutive rows, so the
// groups at the top of a band also need rows 8i-2 and 8i-1 from the previous
// band. The row buffer keeps lanes 6 and 7 of every column of the previous
// band (one entry per column, N = MAX_COLS entries of two pixels). The remap
// then forms eight groups, group g = (row 8i+g-2, 8i+g-1, 8i+g), [0] oldest:
//   g=0: buf R6, buf R7, R0     g=1: buf R7, R0, R1     g>=2: R(g-2), R(g-1), Rg
// The entry is read and rewritten at the same column in the same cycle, so
// the stream never pauses at a band boundary: one word in, eight groups out
// per cycle. Latency is one cycle (registered outputs); the tag travels along.
// For the first band of a channel the buffer holds stale rows and groups 0
// and 1 are garbage; downstream logic treats those rows as invalid.
// Follows the paper's Fig. 2; the depth N and the one-cycle timing are this
// design's choices.
module col_buffer
  import cnn_pkg::*;
#(
  parameter int MAX_COLS = 256
) (
  input  logic                clk,
  input  logic                rst_n,
  input  tag_t                in_tag,    // in_tag.valid qualifies in_data
  input  word_t               in_data,
  output tag_t                out_tag,
  output group_t [LANES-1:0]  out_data
);
  typedef struct packed { pix_t r6; pix_t r7; } prev_t;
  prev_t rowbuf [MAX_COLS];
  prev_t prev;
  logic [$clog2(MAX_COLS)-1:0] idx;

  assign idx  = in_tag.col[$clog2(MAX_COLS)-1:0];
  assign prev = rowbuf[idx];

  always_ff @(posedge clk) begin
    if (in_tag.valid) rowbuf[idx] <= '{r6: in_data[6], r7: in_data[7]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_tag  <= '0;
      out_data <= '0;
    end else begin
      out_tag <= in_tag;
      if (in_tag.valid) begin
        out_data[0] <= '{in_data[0], prev.r7, prev.r6};
        out_data[1] <= '{in_data[1], in_data[0], prev.r7};
        for (int g = 2; g < LANES; g++)
          out_data[g] <= '{in_data[g], in_data[g-1], in_data[g-2]};
      end
    end
  end
endmodule
