// tb_vqfpga: self-checking test of one video quality module.
//
// A producer process sends resolution headers, frames of several test
// pictures and stream closes; a consumer process takes results words with
// random back-pressure and compares each with the reference computed by
// tb_vq_pkg::ref_frame from pixel coordinates. Frames are sent back to back,
// with and without random idle cycles. The first frame is sent at full rate
// with the consumer always ready and its results must leave the module 5
// clock edges after its last word was taken (out_valid rises 4 clocks after).
// Also covered: a header with no whole block is ignored, eos gives an eos word
// after the last results, and a new header after eos starts a new resolution.
module tb_vqfpga;
  import vq_pkg::*;
  import tb_vq_pkg::*;

  logic         clk = 1'b0;
  logic         rst_n = 1'b0;
  logic         in_valid = 1'b0, in_ready, in_eos = 1'b0;
  logic [127:0] in_data = '0;
  logic         out_valid, out_ready = 1'b0, out_eos;
  logic [127:0] out_data;

  always #5 clk = ~clk;

  vqfpga dut (.*);

  int checks = 0, failures = 0;
  int gap_pct = 0, stall_pct = 0;
  longint unsigned cycle = 0, last_accept = 0, first_out = 0;
  bit measure = 0;

  typedef struct { logic [127:0] d; bit eos; } exp_t;
  exp_t expq[$];

  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic send(logic [127:0] d, bit eos);
    @(negedge clk);
    while ($urandom_range(99) < gap_pct) @(negedge clk);
    in_valid = 1'b1; in_data = d; in_eos = eos;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    last_accept = cycle;
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  task automatic send_frame(pic_e kind, int unsigned seed, int w, int h);
    ref_t r;
    r = ref_frame(kind, seed, w, h);
    expq.push_back('{ref_word(r), 1'b0});
    for (int i = 0; i < r.n_mb; i++) send(frame_word(kind, seed, w, i), 1'b0);
  endtask

  // consumer
  always @(negedge clk) out_ready = ($urandom_range(99) >= stall_pct);

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      if (measure) begin
        first_out = cycle;
        measure   = 0;
      end
      if (expq.size() == 0) begin
        check(0, "unexpected output word");
      end else begin
        exp_t e;
        e = expq.pop_front();
        check(out_eos == e.eos, $sformatf("eos flag %0d, expected %0d", out_eos, e.eos));
        check(out_data == e.d, $sformatf("results %h, expected %h", out_data, e.d));
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // full-rate frame: latency
    send(header_word(33, 25), 0);
    measure = 1;
    send_frame(PIC_RANDOM, 1, 33, 25);
    repeat (8) @(posedge clk);
    check(first_out - last_accept == 5,
          $sformatf("result latency %0d edges, expected 5", first_out - last_accept));

    // back to back frames of each picture kind, then with gaps and stalls
    for (int pass = 0; pass < 2; pass++) begin
      gap_pct = pass ? 30 : 0;
      stall_pct = pass ? 60 : 0;
      for (int k = 0; k <= 7; k++) send_frame(pic_e'(k), 10 * pass + k + 2, 33, 25);
    end
    send(0, 1);
    expq.push_back('{128'b0, 1'b1});

    // new stream, smallest frame (one block); an empty-frame header is ignored
    gap_pct = 10; stall_pct = 30;
    send(header_word(5, 40), 0);
    send(header_word(9, 9), 0);
    send_frame(PIC_RANDOM, 50, 9, 9);
    send_frame(PIC_FLAT, 51, 9, 9);
    send_frame(PIC_STRIPES, 52, 9, 9);
    send(0, 1);
    expq.push_back('{128'b0, 1'b1});

    // third stream, tall and narrow
    send(header_word(17, 41), 0);
    send_frame(PIC_BLOCKY, 60, 17, 41);
    send_frame(PIC_DARK, 61, 17, 41);

    repeat (200) @(posedge clk);
    check(expq.size() == 0, $sformatf("%0d results never came out", expq.size()));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
