// vq_stream_fifo: first-in first-out buffer that carries one stream between
// two processes, as an Impulse C stream does in hardware.
//
// It is a circular buffer of DEPTH words with valid/ready handshakes on both
// sides. A word is written when in_valid and in_ready are both high and read
// when out_valid and out_ready are both high; both may happen in one cycle, so
// a stream passes at one word per clock while the buffer is neither empty nor
// full. The output is read straight from the storage array: a word written in
// cycle t can be read in cycle t+1.
// The paper says only that streams become FIFOs; the depth and the handshake
// are this design's choice.
module vq_stream_fifo #(
  parameter int unsigned WIDTH = 129,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic [AW:0]      count;
  logic             push, pop;

  assign in_ready  = (count < (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  function automatic logic [AW-1:0] next_ptr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= next_ptr(wr_ptr);
      if (pop)  rd_ptr <= next_ptr(rd_ptr);
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  // The buffer never holds more than DEPTH words.
  a_count_range: assert property (@(posedge clk) disable iff (!rst_n)
    count <= (AW+1)'(DEPTH));

endmodule
