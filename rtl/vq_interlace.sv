// vq_interlace: interlace distortion metric. It counts, per frame, the 4x4
// microblocks whose rows alternate in brightness, the pattern left when the
// two half-frames of an interlaced picture are misaligned.
//
// How it works. With p(4c+r+1) the sample in column c, row r, a microblock is
// marked when, in all four columns, row 1 is brighter than row 2, row 3 brighter
// than row 2 and row 3 brighter than row 4 (IS_INTERLACE), or when all twelve
// comparisons hold the other way round (IS_INTERLACE2). Ties mark nothing.
// The twelve comparisons per polarity and the 32-bit count follow the paper;
// the host divides the count by the number of microblocks 4*BLX*BLY.
//
// Timing: stage 1 registers the detection flag, stage 2 adds it to the frame
// count (restarting at the frame's first microblock). The count appears on
// count with res_valid high for one enabled cycle, two enabled cycles after
// the frame's last microblock was presented. Registers move only when en is high.
module vq_interlace
  import vq_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     en,
  input  logic     mb_valid,
  input  mb_t      mb,
  input  mb_info_t mb_info,
  output logic     res_valid,
  output count_t   count
);
  logic     is_int, is_int2, hit;
  logic     hit_q, valid_q;
  mb_info_t info_q;
  count_t   acc, acc_new;

  always_comb begin
    is_int  = 1'b1;
    is_int2 = 1'b1;
    for (int c = 0; c < 4; c++) begin
      is_int  &= (px(mb, 4*c+1) > px(mb, 4*c+2)) && (px(mb, 4*c+3) > px(mb, 4*c+2))
              && (px(mb, 4*c+3) > px(mb, 4*c+4));
      is_int2 &= (px(mb, 4*c+1) < px(mb, 4*c+2)) && (px(mb, 4*c+3) < px(mb, 4*c+2))
              && (px(mb, 4*c+3) < px(mb, 4*c+4));
    end
    hit = is_int || is_int2;
  end

  assign acc_new = (info_q.first ? count_t'(0) : acc) + count_t'(hit_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q   <= 1'b0;
      info_q    <= '0;
      hit_q     <= 1'b0;
      acc       <= '0;
      res_valid <= 1'b0;
      count     <= '0;
    end else if (en) begin
      valid_q   <= mb_valid;
      info_q    <= mb_info;
      hit_q     <= hit;
      res_valid <= 1'b0;
      if (valid_q) begin
        acc <= acc_new;
        if (info_q.last) begin
          res_valid <= 1'b1;
          count     <= acc_new;
        end
      end
    end
  end

endmodule
