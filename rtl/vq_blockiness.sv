// vq_blockiness: hardware part of the blockiness metric. It accumulates, over
// every 8x8 block of a frame, IntraSum (differences between two neighbouring
// pixels just inside a block) and InterSum (differences across the border to
// the next block). The host divides IntraSum by InterSum.
//
// How it works. The producer sends blocks shifted by one pixel right and down,
// so the border with the right neighbour lies between local columns 6 and 7 of
// the shifted block and the border with the lower neighbour between local rows
// 6 and 7; all data for one block's sums arrive within its own four
// microblocks. Per microblock (p(4c+r+1) = column c, row r):
//   top-right    (pos 2): rows 0..3, |p9..p12 - p5..p8| intra, |p9..p12 - p13..p16| inter
//   bottom-left  (pos 3): columns 0..3, |p2-p3| style intra, |p4-p3| style inter
//   bottom-right (pos 0): row 0 and row 3 horizontally, column 0 and column 3
//                         vertically, as in the paper's listing
//   top-left     (pos 1): nothing.
// This gives 12 intra and 12 inter differences per block. The terms follow the
// paper's hardware listing exactly.
//
// Timing: stage 1 registers the four-term partial sums of a microblock, stage
// 2 adds them to the frame sums (restarting at the frame's first microblock).
// The frame result appears in intra_sum/inter_sum with res_valid high for one
// enabled cycle, two enabled cycles after the frame's last microblock was
// presented. All registers move only when en is high.
module vq_blockiness
  import vq_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     en,
  input  logic     mb_valid,
  input  mb_t      mb,
  input  mb_info_t mb_info,
  output logic     res_valid,
  output count_t   intra_sum,
  output count_t   inter_sum
);
  logic [10:0] intra_part, inter_part;   // four 8-bit differences
  logic [10:0] intra_q, inter_q;
  logic        valid_q;
  mb_info_t    info_q;
  count_t      intra_acc, inter_acc;
  count_t      intra_new, inter_new;

  always_comb begin
    intra_part = '0;
    inter_part = '0;
    unique case (mb_info.pos)
      MB_TR: begin
        intra_part = 11'(absdiff(px(mb, 9),  px(mb, 5))) + 11'(absdiff(px(mb, 10), px(mb, 6)))
                   + 11'(absdiff(px(mb, 11), px(mb, 7))) + 11'(absdiff(px(mb, 12), px(mb, 8)));
        inter_part = 11'(absdiff(px(mb, 9),  px(mb, 13))) + 11'(absdiff(px(mb, 10), px(mb, 14)))
                   + 11'(absdiff(px(mb, 11), px(mb, 15))) + 11'(absdiff(px(mb, 12), px(mb, 16)));
      end
      MB_BL: begin
        intra_part = 11'(absdiff(px(mb, 2),  px(mb, 3)))  + 11'(absdiff(px(mb, 6),  px(mb, 7)))
                   + 11'(absdiff(px(mb, 10), px(mb, 11))) + 11'(absdiff(px(mb, 14), px(mb, 15)));
        inter_part = 11'(absdiff(px(mb, 4),  px(mb, 3)))  + 11'(absdiff(px(mb, 8),  px(mb, 7)))
                   + 11'(absdiff(px(mb, 12), px(mb, 11))) + 11'(absdiff(px(mb, 16), px(mb, 15)));
      end
      MB_BR: begin
        intra_part = 11'(absdiff(px(mb, 9),  px(mb, 5)))  + 11'(absdiff(px(mb, 8),  px(mb, 12)))
                   + 11'(absdiff(px(mb, 2),  px(mb, 3)))  + 11'(absdiff(px(mb, 14), px(mb, 15)));
        inter_part = 11'(absdiff(px(mb, 9),  px(mb, 13))) + 11'(absdiff(px(mb, 12), px(mb, 16)))
                   + 11'(absdiff(px(mb, 4),  px(mb, 3)))  + 11'(absdiff(px(mb, 15), px(mb, 16)));
      end
      default: ;  // MB_TL: no border pixels
    endcase
  end

  assign intra_new = (info_q.first ? count_t'(0) : intra_acc) + count_t'(intra_q);
  assign inter_new = (info_q.first ? count_t'(0) : inter_acc) + count_t'(inter_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q   <= 1'b0;
      info_q    <= '0;
      intra_q   <= '0;
      inter_q   <= '0;
      intra_acc <= '0;
      inter_acc <= '0;
      res_valid <= 1'b0;
      intra_sum <= '0;
      inter_sum <= '0;
    end else if (en) begin
      // stage 1: partial sums of one microblock
      valid_q <= mb_valid;
      info_q  <= mb_info;
      intra_q <= intra_part;
      inter_q <= inter_part;
      // stage 2: frame sums
      res_valid <= 1'b0;
      if (valid_q) begin
        intra_acc <= intra_new;
        inter_acc <= inter_new;
        if (info_q.last) begin
          res_valid <= 1'b1;
          intra_sum <= intra_new;
          inter_sum <= inter_new;
        end
      end
    end
  end

endmodule
