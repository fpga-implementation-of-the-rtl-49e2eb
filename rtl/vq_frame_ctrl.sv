// vq_frame_ctrl: front end of one video quality module. It reads the input
// stream, takes the video resolution from the first word, then turns every
// following 128-bit word into a 4x4 microblock tagged with its place in the
// frame.
//
// How it works. After reset, and after every stream close, the controller waits
// for a header word: bits [15:0] hold the frame width and bits [31:16] the frame
// height, in pixels. Because the producer drops the first row and the first
// column and sends 8x8 blocks shifted by one pixel, a W x H frame holds
// BLX = (W-1)/8 by BLY = (H-1)/8 whole blocks, i.e. 4*BLX*BLY microblocks.
// Each data word then gets a running microblock number 1..4*BLX*BLY; its value
// modulo four gives the position inside the 8x8 block (1 top-left, 2 top-right,
// 3 bottom-left, 0 bottom-right), and the first and last microblocks of the
// frame are flagged so that the metric units restart their sums at each frame.
// After the last microblock the count starts again with the next frame. A word
// with eos set closes the stream: the controller returns to waiting for a
// header and passes the close on.
// A header whose frame holds no whole block is ignored (still waiting).
//
// The paper states that the resolution is sent ahead of the video, that each
// word becomes one microblock, and that the registers restart with each frame;
// the header layout, the block count formula and the eos handling are this
// design's choices.
//
// Timing: one word per cycle. Outputs are registered and change only when en
// is high, so en stalls this stage together with the rest of the pipeline;
// in_ready equals en.
module vq_frame_ctrl
  import vq_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,         // pipeline advance
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [WORD_W-1:0] in_data,
  input  logic              in_eos,
  output logic              mb_valid,   // a microblock is in mb/mb_info
  output mb_t               mb,
  output mb_info_t          mb_info,
  output logic              eos_valid,  // the stream was closed
  output logic              hdr_seen,   // a header was taken (one cycle)
  output count_t            mb_per_frame
);
  typedef enum logic {S_HEADER, S_FRAME} state_e;

  state_e       state;
  count_t       mb_cnt;     // microblocks of the current frame already seen
  logic [15:0]  width, height;
  logic [12:0]  blx, bly;
  count_t       mb_total;
  logic         take;

  assign in_ready = en;
  assign take     = en && in_valid;

  assign width    = in_data[15:0];
  assign height   = in_data[31:16];
  assign blx      = 13'((width  - 16'd1) >> 3);
  assign bly      = 13'((height - 16'd1) >> 3);
  assign mb_total = (count_t'(blx) * count_t'(bly)) << 2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_HEADER;
      mb_cnt       <= '0;
      mb_per_frame <= '0;
      mb_valid     <= 1'b0;
      mb           <= '0;
      mb_info      <= '0;
      eos_valid    <= 1'b0;
      hdr_seen     <= 1'b0;
    end else if (en) begin
      mb_valid  <= 1'b0;
      eos_valid <= 1'b0;
      hdr_seen  <= 1'b0;
      if (take) begin
        if (in_eos) begin
          state     <= S_HEADER;
          eos_valid <= 1'b1;
        end else if (state == S_HEADER) begin
          if (width != '0 && height != '0 && mb_total != '0) begin
            mb_per_frame <= mb_total;
            mb_cnt       <= '0;
            state        <= S_FRAME;
            hdr_seen     <= 1'b1;
          end
        end else begin
          mb_valid      <= 1'b1;
          mb            <= mb_t'(in_data);
          mb_info.first <= (mb_cnt == '0);
          mb_info.last  <= (mb_cnt + 1'b1 == mb_per_frame);
          mb_info.pos   <= mb_pos_e'(mb_cnt[1:0] + 2'd1);
          mb_cnt        <= (mb_cnt + 1'b1 == mb_per_frame) ? '0 : mb_cnt + 1'b1;
        end
      end
    end
  end

endmodule
