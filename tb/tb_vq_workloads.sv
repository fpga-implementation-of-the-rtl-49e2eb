// tb_vq_workloads: the resolutions of the original evaluation, run at once
// on the six lanes of the accelerator at its default size.
//
// Lane 0 gets QVGA (320x240), lane 1 VGA (640x480), lane 2 fullHD
// (1920x1080), lanes 3 and 4 4K (4096x2160) and lane 5 two fullHD frames back
// to back. Words are sent at full rate and the consumers are always ready.
// Each results word is checked against tb_vq_pkg::ref_frame, and each lane
// must finish within a few clocks of the number of words it was sent
// (one word per clock per lane). 8K is covered by tb_vq_full.
module tb_vq_workloads;
  import vq_pkg::*;
  import tb_vq_pkg::*;

  localparam int N = 6;
  localparam int WS[N] = '{320, 640, 1920, 4096, 4096, 1920};
  localparam int HS[N] = '{240, 480, 1080, 2160, 2160, 1080};
  localparam int NF[N] = '{1, 1, 1, 1, 1, 2};

  logic                  clk = 1'b0, rst_n = 1'b0;
  logic [N-1:0]          in_valid = '0, in_ready, in_eos = '0;
  logic [N-1:0][127:0]   in_data = '0;
  logic [N-1:0]          out_valid, out_ready = '1, out_eos;
  logic [N-1:0][127:0]   out_data;

  always #5 clk = ~clk;

  vq_top dut (.*);

  int checks = 0, failures = 0, done = 0;
  logic [127:0] expq[N][$];
  longint unsigned cycle = 0, last_out[N];

  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic pic_e kind_of(int l, int f);
    return pic_e'((l == 0) ? PIC_STRIPES : (l == 1) ? PIC_DARK : (l == 2) ? PIC_RANDOM
                : (l == 3) ? PIC_BLOCKY : (l == 4) ? PIC_FLAT : (f == 0 ? PIC_STRIPES2 : PIC_FLAT_D4));
  endfunction

  always @(posedge clk) begin
    for (int l = 0; l < N; l++) begin
      if (rst_n && out_valid[l] && out_ready[l]) begin
        logic [127:0] e;
        last_out[l] = cycle;
        if (expq[l].size() == 0) check(0, $sformatf("lane %0d: unexpected output", l));
        else begin
          e = expq[l].pop_front();
          check(!out_eos[l] && out_data[l] == e,
                $sformatf("lane %0d: got %h, expected %h", l, out_data[l], e));
        end
      end
    end
  end

  task automatic lane(int l);
    ref_t r;
    longint unsigned t0, words = 0;
    @(negedge clk);
    in_valid[l] = 1'b1;
    in_data[l] = header_word(WS[l], HS[l]);
    @(posedge clk);
    t0 = cycle;
    for (int f = 0; f < NF[l]; f++) begin
      r = ref_frame(kind_of(l, f), 30 + l + f, WS[l], HS[l]);
      expq[l].push_back(ref_word(r));
      words += r.n_mb;
      for (int i = 0; i < r.n_mb; i++) begin
        @(negedge clk);
        in_data[l] = frame_word(kind_of(l, f), 30 + l + f, WS[l], i);
        @(posedge clk);
        if (!in_ready[l]) check(0, $sformatf("lane %0d stalled", l));
      end
    end
    @(negedge clk);
    in_valid[l] = 1'b0;
    repeat (12) @(posedge clk);
    check(expq[l].size() == 0, $sformatf("lane %0d: %0d results missing", l, expq[l].size()));
    check(last_out[l] - t0 <= words + 8,
          $sformatf("lane %0d: %0d clocks for %0d words", l, last_out[l] - t0, words));
    $display("lane %0d: %0dx%0d, %0d frame(s), %0d words, last results after %0d clocks",
             l, WS[l], HS[l], NF[l], words, last_out[l] - t0);
    done++;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int l = 0; l < N; l++) begin
      fork
        automatic int ll = l;
        lane(ll);
      join_none
    end
    wait (done == N);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (700000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
