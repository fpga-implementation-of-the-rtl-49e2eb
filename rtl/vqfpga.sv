// vqfpga: one complete video quality assessment module. It reads a stream of
// 128-bit microblock words and, for every video frame, writes one 128-bit
// results word holding the blackout flag, the exposure value, the interlace
// count and the two blockiness sums.
//
// How it works. vq_frame_ctrl takes the resolution header and tags each
// microblock with its position in the block and in the frame. The same
// microblock then goes to all four metric units at once: vq_blockiness,
// vq_exposure, vq_interlace, and vq_blackout, which works on the exposure
// unit's largest and smallest block sums. Each unit restarts its sums at the
// first microblock of a frame, so frames may follow each other back to back.
// The units finish a frame after two (blockiness, interlace) or three
// (exposure, blackout) cycles; the earlier results wait in holding registers
// and the results word is assembled when the exposure result arrives. A
// frame is at least one block, four words, so a held result cannot be
// overwritten by the next frame's before it is used. A stream close (eos) is
// delayed by the same three cycles and leaves as a results word with eos set
// and zero data, after the last frame's results.
// The four metrics, their sharing of one input and the results layout follow
// the paper; the pipelining and the handshakes are this design's.
//
// Interface and timing: valid/ready on both streams. The whole pipeline moves
// when the output register is empty or being read (en); in_ready equals en,
// so a full output stalls the input. At full rate one word is taken per clock
// and a results word leaves 4 clocks after the frame's last word was taken.
module vqfpga
  import vq_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [WORD_W-1:0] in_data,
  input  logic              in_eos,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [WORD_W-1:0] out_data,
  output logic              out_eos
);
  logic       en;
  logic       mb_valid, eos_valid, hdr_seen;
  mb_t        mb;
  mb_info_t   mb_info;
  count_t     mb_per_frame;

  logic       blk_valid, int_valid, exp_valid;
  count_t     intra_sum, inter_sum, int_count;
  logic [7:0] exposure;
  block_sum_t max1, min1;
  logic       blackout;

  count_t     intra_hold, inter_hold, int_hold;
  logic [2:0] eos_dly;
  results_t   res;

  assign en = !out_valid || out_ready;

  vq_frame_ctrl u_ctrl (
    .clk, .rst_n, .en,
    .in_valid, .in_ready, .in_data, .in_eos,
    .mb_valid, .mb, .mb_info, .eos_valid, .hdr_seen, .mb_per_frame
  );

  vq_blockiness u_blockiness (
    .clk, .rst_n, .en, .mb_valid, .mb, .mb_info,
    .res_valid(blk_valid), .intra_sum, .inter_sum
  );

  vq_interlace u_interlace (
    .clk, .rst_n, .en, .mb_valid, .mb, .mb_info,
    .res_valid(int_valid), .count(int_count)
  );

  vq_exposure u_exposure (
    .clk, .rst_n, .en, .mb_valid, .mb, .mb_info,
    .res_valid(exp_valid), .exposure, .max1, .min1
  );

  vq_blackout u_blackout (
    .max1, .min1, .blackout
  );

  always_comb begin
    res           = '0;
    res.blackout  = blackout;
    res.exposure  = exposure;
    res.interlace = int_hold;
    res.inter_sum = inter_hold;
    res.intra_sum = intra_hold;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      intra_hold <= '0;
      inter_hold <= '0;
      int_hold   <= '0;
      eos_dly    <= '0;
      out_valid  <= 1'b0;
      out_data   <= '0;
      out_eos    <= 1'b0;
    end else if (en) begin
      if (blk_valid) begin
        intra_hold <= intra_sum;
        inter_hold <= inter_sum;
      end
      if (int_valid) int_hold <= int_count;
      eos_dly <= {eos_dly[1:0], eos_valid};
      // exp_valid and eos_dly[2] are never high together (eos follows the
      // last microblock by at least one word).
      out_valid <= exp_valid || eos_dly[2];
      out_eos   <= eos_dly[2];
      out_data  <= exp_valid ? WORD_W'(res) : '0;
    end
  end

  // Output handshake: a word offered and not taken stays unchanged.
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data) && $stable(out_eos));
  a_no_collision: assert property (@(posedge clk) disable iff (!rst_n)
    en |-> !(exp_valid && eos_dly[2]));

endmodule
