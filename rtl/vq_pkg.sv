// vq_pkg: types and constants shared by the video quality assessment modules.
//
// A 128-bit stream word carries one 4x4 microblock of 8-bit luminance samples.
// Sample p(k), k = 1..16, sits in bits [8k-1 : 8k-8] of the word, so p1 is the
// least significant byte. Inside a microblock the samples are numbered column by
// column: p(4c+r+1) is the sample in column c, row r (c, r = 0..3). An 8x8 block
// is sent as four microblocks: top-left, top-right, bottom-left, bottom-right.
// The numbering and the block/microblock order follow the paper; the byte order
// inside the word is this design's choice.
//
// The results word follows the paper's output frame layout bit for bit:
//   [127] blackout, [126:104] unused, [103:96] exposure, [95:64] interlace count,
//   [63:32] blockiness InterSum, [31:0] blockiness IntraSum.
package vq_pkg;

  localparam int unsigned WORD_W = 128;  // stream width of the FPGA platform
  localparam int unsigned MB_PIX = 16;   // samples per 4x4 microblock

  // Blackout threshold thBlout (paper: "set to a constant four").
  localparam int unsigned TH_BLOUT = 4;
  // Start value of the four smallest block sums (paper: 16384); larger than
  // any real 8x8 sum, 64 * 255 = 16320.
  localparam logic [15:0] BLOCK_SUM_MIN_INIT = 16'd16384;

  typedef logic [7:0]             pixel_t;
  typedef logic [MB_PIX-1:0][7:0] mb_t;        // mb[k-1] is sample p(k)
  typedef logic [15:0]            block_sum_t; // co_uint16 in the paper
  typedef logic [31:0]            count_t;     // co_uint32 accumulators

  // Position of a microblock inside its 8x8 block, as microBlock % 4 with
  // microBlock counted from 1: 1 = top-left, 2 = top-right, 3 = bottom-left,
  // 0 = bottom-right.
  typedef enum logic [1:0] {
    MB_BR = 2'd0,
    MB_TL = 2'd1,
    MB_TR = 2'd2,
    MB_BL = 2'd3
  } mb_pos_e;

  // Side information that travels with each microblock through the pipeline.
  typedef struct packed {
    logic    first;  // first microblock of the frame
    logic    last;   // last microblock of the frame
    mb_pos_e pos;    // position inside the 8x8 block
  } mb_info_t;

  // One stream beat. eos marks the stream being closed; its data is ignored.
  typedef struct packed {
    logic              eos;
    logic [WORD_W-1:0] data;
  } stream_word_t;

  // Results frame sent once per video frame.
  typedef struct packed {
    logic        blackout;
    logic [22:0] unused;
    logic [7:0]  exposure;
    count_t      interlace;
    count_t      inter_sum;
    count_t      intra_sum;
  } results_t;

  // Sample p(k) of a microblock, k = 1..16 as in the paper's listings.
  function automatic pixel_t px(input mb_t mb, input int unsigned k);
    return mb[k-1];
  endfunction

  function automatic logic [8:0] absdiff(input pixel_t a, input pixel_t b);
    return (a > b) ? {1'b0, a - b} : {1'b0, b - a};
  endfunction

endpackage
