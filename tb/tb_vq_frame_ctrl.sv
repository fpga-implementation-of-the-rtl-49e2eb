// tb_vq_frame_ctrl: self-checking test of vq_frame_ctrl.
//
// Headers of several resolutions are sent, each followed by two frames of
// numbered words and a stream close. For every microblock presented the test
// checks the data, the position in the block ((n+1) mod 4 for the n-th word
// of the frame, counted from 0), and the first/last flags; it checks the
// microblock count 4*((W-1)/8)*((H-1)/8) worked out from the header, that an
// eos is passed on, that a header with no whole block is ignored, and that en
// low freezes the outputs and takes no input.
module tb_vq_frame_ctrl;
  import vq_pkg::*;

  logic         clk = 1'b0, rst_n = 1'b0, en = 1'b1;
  logic         in_valid = 1'b0, in_ready, in_eos = 1'b0;
  logic [127:0] in_data = '0;
  logic         mb_valid, eos_valid, hdr_seen;
  mb_t          mb;
  mb_info_t     mb_info;
  count_t       mb_per_frame;

  always #5 clk = ~clk;

  vq_frame_ctrl dut (.*);

  int checks = 0, failures = 0, n_eos = 0, n_hdr = 0;
  int exp_n = 0, idx = 0, stream = 0;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic logic [127:0] word_of(int s, int i);
    return {32'(s), 32'(i), 32'h1234_0000 + 32'(i), ~32'(i)};
  endfunction

  always @(posedge clk) begin
    if (rst_n && en) begin
      if (mb_valid) begin
        check(mb == mb_t'(word_of(stream, idx)), $sformatf("word %0d data", idx));
        check(mb_info.first == (idx % exp_n == 0), $sformatf("word %0d first flag", idx));
        check(mb_info.last == (idx % exp_n == exp_n - 1), $sformatf("word %0d last flag", idx));
        check(mb_info.pos == mb_pos_e'(((idx % exp_n) + 1) % 4), $sformatf("word %0d position", idx));
        idx++;
      end
      if (eos_valid) n_eos++;
      if (hdr_seen) begin
        n_hdr++;
        check(mb_per_frame == count_t'(exp_n), $sformatf("count %0d, expected %0d", mb_per_frame, exp_n));
      end
    end
  end

  task automatic send(logic [127:0] d, bit eos);
    @(negedge clk);
    while ($urandom_range(3) == 0) begin
      en = 1'b0;
      in_valid = $urandom_range(1);
      @(negedge clk);
    end
    en = 1'b1;
    in_valid = 1'b1; in_data = d; in_eos = eos;
    @(posedge clk);
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  initial begin
    int sizes[4][2] = '{'{9, 9}, '{33, 25}, '{40, 17}, '{17, 64}};
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    foreach (sizes[s]) begin
      int w = sizes[s][0], h = sizes[s][1];
      if (s == 1) send({96'b0, 16'd20, 16'd8}, 0);  // no whole block: ignored
      exp_n = 4 * ((w - 1) / 8) * ((h - 1) / 8);
      send({96'b0, 16'(h), 16'(w)}, 0);
      for (int i = 0; i < 2 * exp_n; i++) send(word_of(stream, i), 0);
      send(0, 1);
      repeat (2) @(posedge clk);
      check(idx == 2 * exp_n, $sformatf("stream %0d: %0d microblocks, expected %0d", s, idx, 2 * exp_n));
      idx = 0;
      stream++;
    end
    check(n_eos == 4, $sformatf("%0d stream closes seen, expected 4", n_eos));
    check(n_hdr == 4, $sformatf("%0d headers taken, expected 4", n_hdr));
    check(in_ready == en, "in_ready differs from en");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
