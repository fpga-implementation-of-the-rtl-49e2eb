// vq_top: the video quality assessment accelerator. N_VQ independent lanes
// each assess one video stream; the main configuration has six, one per
// producer/consumer pair on the host.
//
// How it works. Each lane is an input stream FIFO, a vqfpga module and an
// output stream FIFO. The lanes share only the clock and reset; each reads its
// own stream of a resolution header followed by microblock words and writes
// one results word per frame (and an eos word when its stream is closed).
// Stream word layouts are described in vq_pkg. The host-side stream transport
// (PCIe endpoint and its stream adapters) is not part of this RTL: its
// per-lane valid/ready/data/eos signals are the ports of this module.
// Six lanes and the 128-bit stream width follow the paper; the FIFO depth is
// this design's choice.
//
// Timing: each lane takes one word per clock when nothing is stalled. A
// results word reaches out_* 5 clocks after the last word of its frame
// entered in_* with no stall (one FIFO cycle, four in vqfpga, the output FIFO
// passes it on the next clock).
module vq_top
  import vq_pkg::*;
#(
  parameter int unsigned N_VQ       = 6,
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [N_VQ-1:0]               in_valid,
  output logic [N_VQ-1:0]               in_ready,
  input  logic [N_VQ-1:0][WORD_W-1:0]   in_data,
  input  logic [N_VQ-1:0]               in_eos,
  output logic [N_VQ-1:0]               out_valid,
  input  logic [N_VQ-1:0]               out_ready,
  output logic [N_VQ-1:0][WORD_W-1:0]   out_data,
  output logic [N_VQ-1:0]               out_eos
);
  for (genvar g = 0; g < N_VQ; g++) begin : g_lane
    stream_word_t in_w, vq_in_w, vq_out_w, out_w;
    logic         vq_in_valid, vq_in_ready, vq_out_valid, vq_out_ready;

    assign in_w.data = in_data[g];
    assign in_w.eos  = in_eos[g];

    vq_stream_fifo #(.WIDTH($bits(stream_word_t)), .DEPTH(FIFO_DEPTH)) u_in_fifo (
      .clk, .rst_n,
      .in_valid (in_valid[g]), .in_ready (in_ready[g]), .in_data (in_w),
      .out_valid(vq_in_valid), .out_ready(vq_in_ready), .out_data(vq_in_w)
    );

    vqfpga u_vq (
      .clk, .rst_n,
      .in_valid (vq_in_valid),  .in_ready (vq_in_ready),
      .in_data  (vq_in_w.data), .in_eos   (vq_in_w.eos),
      .out_valid(vq_out_valid), .out_ready(vq_out_ready),
      .out_data (vq_out_w.data), .out_eos (vq_out_w.eos)
    );

    vq_stream_fifo #(.WIDTH($bits(stream_word_t)), .DEPTH(FIFO_DEPTH)) u_out_fifo (
      .clk, .rst_n,
      .in_valid (vq_out_valid), .in_ready (vq_out_ready), .in_data (vq_out_w),
      .out_valid(out_valid[g]), .out_ready(out_ready[g]), .out_data(out_w)
    );

    assign out_data[g] = out_w.data;
    assign out_eos[g]  = out_w.eos;
  end

endmodule
