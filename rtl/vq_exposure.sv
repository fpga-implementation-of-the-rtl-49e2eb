// vq_exposure: exposure time distortion metric. It finds the four darkest and
// the four brightest 8x8 blocks of a frame and reports the mean luminance of
// these eight blocks, which is low for an underexposed frame and high for an
// overexposed one.
//
// How it works, following the paper's hardware version:
//  * the luminance of each block is kept as a sum (blockSum, 16 bits) instead of
//    a mean, since every block has 64 pixels;
//  * each blockSum is inserted into two sorted lists of four, blockSumMIN1..4
//    (smallest first) and blockSumMAX1..4 (largest first), with the paper's
//    nested comparisons: strict "<" for the minimum list, the mirror strict ">"
//    for the maximum list;
//  * at the start of each frame the minimum list restarts from 16384 and the
//    maximum list from 0;
//  * the result is ((MIN1>>2)+..+(MIN4>>2)+(MAX1>>2)+..+(MAX4>>2)) >> 7, i.e. the
//    sum of the eight block sums divided by 8*64 = 512 with the division split
//    into a shift of two before the sum (to stay in 16 bits) and seven after.
// The result is one byte. MAX1 and MIN1 also leave the unit for the blackout test.
//
// Timing: stage 1 adds the 16 samples of a microblock, stage 2 adds four
// microblock sums into a block sum, stage 3 updates the two lists. The frame
// result appears with res_valid high for one enabled cycle, three enabled
// cycles after the frame's last microblock was presented. Registers move only
// when en is high.
module vq_exposure
  import vq_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,
  input  logic       mb_valid,
  input  mb_t        mb,
  input  mb_info_t   mb_info,
  output logic       res_valid,
  output logic [7:0] exposure,
  output block_sum_t max1,       // largest block sum of the frame
  output block_sum_t min1        // smallest block sum of the frame
);
  typedef block_sum_t list4_t [4];

  // stage 1
  logic [11:0] mb_sum, mb_sum_q;
  logic        valid1;
  mb_info_t    info1;
  // stage 2
  block_sum_t  blk_acc, blk_sum;
  logic        blk_first_acc;
  logic        blk_valid, blk_first, blk_last;
  // stage 3
  list4_t      mins, maxs, min_base, max_base, min_new, max_new;
  logic [15:0] ext_sum;

  always_comb begin
    mb_sum = '0;
    for (int k = 1; k <= 16; k++) mb_sum += 12'(px(mb, k));
  end

  // Insert v into the list of the four smallest values (paper's listing).
  function automatic list4_t insert_min(input list4_t l, input block_sum_t v);
    list4_t r = l;
    if (v < l[3]) begin
      if (v < l[2]) begin
        if (v < l[1]) begin
          if (v < l[0]) begin
            r[3] = l[2]; r[2] = l[1]; r[1] = l[0]; r[0] = v;
          end else begin
            r[3] = l[2]; r[2] = l[1]; r[1] = v;
          end
        end else begin
          r[3] = l[2]; r[2] = v;
        end
      end else begin
        r[3] = v;
      end
    end
    return r;
  endfunction

  // Insert v into the list of the four largest values (mirror of the above).
  function automatic list4_t insert_max(input list4_t l, input block_sum_t v);
    list4_t r = l;
    if (v > l[3]) begin
      if (v > l[2]) begin
        if (v > l[1]) begin
          if (v > l[0]) begin
            r[3] = l[2]; r[2] = l[1]; r[1] = l[0]; r[0] = v;
          end else begin
            r[3] = l[2]; r[2] = l[1]; r[1] = v;
          end
        end else begin
          r[3] = l[2]; r[2] = v;
        end
      end else begin
        r[3] = v;
      end
    end
    return r;
  endfunction

  always_comb begin
    for (int i = 0; i < 4; i++) begin
      min_base[i] = blk_first ? BLOCK_SUM_MIN_INIT : mins[i];
      max_base[i] = blk_first ? block_sum_t'(0)    : maxs[i];
    end
    min_new = insert_min(min_base, blk_sum);
    max_new = insert_max(max_base, blk_sum);
    ext_sum = '0;
    for (int i = 0; i < 4; i++) ext_sum += 16'(min_new[i] >> 2) + 16'(max_new[i] >> 2);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid1        <= 1'b0;
      info1         <= '0;
      mb_sum_q      <= '0;
      blk_acc       <= '0;
      blk_first_acc <= 1'b0;
      blk_valid     <= 1'b0;
      blk_sum       <= '0;
      blk_first     <= 1'b0;
      blk_last      <= 1'b0;
      for (int i = 0; i < 4; i++) begin
        mins[i] <= BLOCK_SUM_MIN_INIT;
        maxs[i] <= '0;
      end
      res_valid <= 1'b0;
      exposure  <= '0;
      max1      <= '0;
      min1      <= '0;
    end else if (en) begin
      // stage 1: sum of one microblock
      valid1   <= mb_valid;
      info1    <= mb_info;
      mb_sum_q <= mb_sum;
      // stage 2: sum of one 8x8 block (four microblocks)
      blk_valid <= 1'b0;
      if (valid1) begin
        if (info1.pos == MB_TL) begin
          blk_acc       <= block_sum_t'(mb_sum_q);
          blk_first_acc <= info1.first;
        end else begin
          blk_acc <= blk_acc + block_sum_t'(mb_sum_q);
        end
        if (info1.pos == MB_BR) begin
          blk_valid <= 1'b1;
          blk_sum   <= blk_acc + block_sum_t'(mb_sum_q);
          blk_first <= blk_first_acc;
          blk_last  <= info1.last;
        end
      end
      // stage 3: four smallest and four largest block sums
      res_valid <= 1'b0;
      if (blk_valid) begin
        mins <= min_new;
        maxs <= max_new;
        if (blk_last) begin
          res_valid <= 1'b1;
          exposure  <= ext_sum[14:7];
          max1      <= max_new[0];
          min1      <= min_new[0];
        end
      end
    end
  end

endmodule
