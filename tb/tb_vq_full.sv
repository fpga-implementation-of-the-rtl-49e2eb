// tb_vq_full: the accelerator at its default size (six lanes) assessing one
// full 8K frame (7680 x 4320) on every lane at once, at full rate.
//
// Each lane receives a header and the 4 * 959 * 539 = 2,067,604 microblock
// words of its frame, one word per clock with no idle cycles, and its
// consumer is always ready. The test checks every lane's results word against
// tb_vq_pkg::ref_frame, and checks the rate: the results of every lane must be
// out no more than 8 clocks after the number of words sent, i.e. the design
// keeps up with one 128-bit word per clock per lane.
module tb_vq_full;
  import vq_pkg::*;
  import tb_vq_pkg::*;

  localparam int N = 6;
  localparam int W = 7680, H = 4320;

  logic                  clk = 1'b0, rst_n = 1'b0;
  logic [N-1:0]          in_valid = '0, in_ready, in_eos = '0;
  logic [N-1:0][127:0]   in_data = '0;
  logic [N-1:0]          out_valid, out_ready = '1, out_eos;
  logic [N-1:0][127:0]   out_data;

  always #5 clk = ~clk;

  vq_top dut (.*);

  int checks = 0, failures = 0;
  logic [127:0] expect_w[N];
  int got[N];
  longint unsigned cycle = 0, start_cycle = 0, out_cycle[N];
  int unsigned n_words;

  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic pic_e kind_of(int l);
    return pic_e'((l == 0) ? PIC_RANDOM : (l == 1) ? PIC_STRIPES : (l == 2) ? PIC_FLAT
                : (l == 3) ? PIC_BLOCKY : (l == 4) ? PIC_DARK : PIC_FLAT_D5);
  endfunction

  always @(posedge clk) begin
    for (int l = 0; l < N; l++) begin
      if (rst_n && out_valid[l] && out_ready[l]) begin
        got[l]++;
        out_cycle[l] = cycle;
        check(!out_eos[l] && out_data[l] == expect_w[l],
              $sformatf("lane %0d: got %h, expected %h", l, out_data[l], expect_w[l]));
      end
    end
  end

  initial begin
    ref_t r;
    for (int l = 0; l < N; l++) begin
      r = ref_frame(kind_of(l), 7 + l, W, H);
      expect_w[l] = ref_word(r);
      n_words = r.n_mb;
      got[l] = 0;
      $display("lane %0d: %0d words, expected results %h", l, r.n_mb, expect_w[l]);
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    in_valid = '1;
    for (int l = 0; l < N; l++) in_data[l] = header_word(W, H);
    @(posedge clk);
    start_cycle = cycle;
    for (int i = 0; i < n_words; i++) begin
      @(negedge clk);
      for (int l = 0; l < N; l++) in_data[l] = frame_word(kind_of(l), 7 + l, W, i);
      @(posedge clk);
      check_ready: if (in_ready != '1) begin
        failures++;
        $display("FAIL: input stalled at word %0d", i);
      end
    end
    @(negedge clk);
    in_valid = '0;
    repeat (20) @(posedge clk);
    for (int l = 0; l < N; l++) begin
      check(got[l] == 1, $sformatf("lane %0d: %0d results words", l, got[l]));
      check(out_cycle[l] - start_cycle <= n_words + 8,
            $sformatf("lane %0d: results after %0d clocks for %0d words",
                      l, out_cycle[l] - start_cycle, n_words));
    end
    $display("results after %0d clocks for %0d words per lane", out_cycle[0] - start_cycle, n_words);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
