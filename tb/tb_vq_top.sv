// tb_vq_top: end-to-end test of the accelerator with its six lanes.
//
// Every lane runs its own producer and consumer concurrently: a sequence of
// streams (header, frames of several test pictures, eos), with random idle
// cycles on the input and random back-pressure on the output. Each results
// word is compared with tb_vq_pkg::ref_frame. Lanes use different
// resolutions so that their frames end at different times.
// Besides the results, the test counts how often each mechanism of the design
// occurred and fails if one never did: input stall (FIFO full), output
// back-pressure, frames sent back to back, stream close and reopen, an ignored
// empty header, a blackout frame and a non-blackout frame, interlaced
// microblocks found, and a frame of a single block (sorted lists not filled).
module tb_vq_top;
  import vq_pkg::*;
  import tb_vq_pkg::*;

  localparam int N = 6;

  logic                  clk = 1'b0, rst_n = 1'b0;
  logic [N-1:0]          in_valid = '0, in_ready, in_eos = '0;
  logic [N-1:0][127:0]   in_data = '0;
  logic [N-1:0]          out_valid, out_ready = '0, out_eos;
  logic [N-1:0][127:0]   out_data;

  always #5 clk = ~clk;

  vq_top dut (.*);

  typedef struct { logic [127:0] d; bit eos; } exp_t;
  exp_t expq[N][$];

  int checks = 0, failures = 0;
  int n_in_stall = 0, n_out_stall = 0, n_b2b = 0, n_eos = 0, n_reopen = 0;
  int n_empty_hdr = 0, n_black = 0, n_noblack = 0, n_interlace = 0, n_one_block = 0;
  int done = 0;
  int stall_pct[N];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic send(int l, logic [127:0] d, bit eos, int gap_pct);
    @(negedge clk);
    while ($urandom_range(99) < gap_pct) @(negedge clk);
    in_valid[l] = 1'b1; in_data[l] = d; in_eos[l] = eos;
    @(posedge clk);
    while (!in_ready[l]) @(posedge clk);
    @(negedge clk);
    in_valid[l] = 1'b0;
  endtask

  task automatic send_frame(int l, pic_e kind, int unsigned seed, int w, int h, int gap_pct);
    ref_t r;
    r = ref_frame(kind, seed, w, h);
    expq[l].push_back('{ref_word(r), 1'b0});
    if (r.blackout) n_black++; else n_noblack++;
    if (r.interlace != 0) n_interlace++;
    if (r.n_mb == 4) n_one_block++;
    for (int i = 0; i < r.n_mb; i++) send(l, frame_word(kind, seed, w, i), 1'b0, gap_pct);
  endtask

  task automatic lane(int l);
    int w = 9 + 8 * (l % 3) + l, h = 9 + 8 * (l / 3) + 2 * l;
    for (int s = 0; s < 2; s++) begin
      int gap = (s == 0) ? 0 : 20;
      if (s == 1) n_reopen++;
      if (l == 0 && s == 1) begin
        send(l, header_word(8, 100), 0, gap);  // no whole block: ignored
        n_empty_hdr++;
      end
      send(l, header_word(w, h), 0, gap);
      for (int f = 0; f < 4; f++) begin
        send_frame(l, pic_e'((l + f + 3 * s) % 8), 100 * l + 10 * s + f, w, h, gap);
        if (gap == 0 && f > 0) n_b2b++;
      end
      send(l, 0, 1, gap);
      expq[l].push_back('{128'b0, 1'b1});
    end
    // a one-block stream
    send(l, header_word(9, 9), 0, 10);
    send_frame(l, PIC_RANDOM, 999 + l, 9, 9, 10);
  endtask

  // The last lane's consumer stops until the other lanes are done, so its
  // results pile up and its input stalls.
  always @(negedge clk)
    for (int l = 0; l < N; l++)
      out_ready[l] = ($urandom_range(99) >= stall_pct[l]) && !(l == N - 1 && done < N - 1);

  always @(posedge clk) begin
    if (rst_n) begin
      for (int l = 0; l < N; l++) begin
        if (in_valid[l] && !in_ready[l]) n_in_stall++;
        if (out_valid[l] && !out_ready[l]) n_out_stall++;
        if (out_valid[l] && out_ready[l]) begin
          if (expq[l].size() == 0) begin
            check(0, $sformatf("lane %0d: unexpected output", l));
          end else begin
            exp_t e;
            e = expq[l].pop_front();
            if (out_eos[l]) n_eos++;
            check(out_eos[l] == e.eos && out_data[l] == e.d,
                  $sformatf("lane %0d: got %h eos %0d, expected %h eos %0d",
                            l, out_data[l], out_eos[l], e.d, e.eos));
          end
        end
      end
    end
  end

  initial begin
    for (int l = 0; l < N; l++) stall_pct[l] = 10 * l + 20;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int l = 0; l < N; l++) begin
      fork
        automatic int ll = l;
        begin
          lane(ll);
          done++;
        end
      join_none
    end
    wait (done == N);
    repeat (300) @(posedge clk);
    for (int l = 0; l < N; l++)
      check(expq[l].size() == 0, $sformatf("lane %0d: %0d results missing", l, expq[l].size()));
    $display("mechanisms: in_stall=%0d out_stall=%0d back_to_back=%0d eos=%0d reopen=%0d",
             n_in_stall, n_out_stall, n_b2b, n_eos, n_reopen);
    $display("            empty_header=%0d blackout=%0d no_blackout=%0d interlace=%0d one_block=%0d",
             n_empty_hdr, n_black, n_noblack, n_interlace, n_one_block);
    check(n_in_stall > 0, "input stall never happened");
    check(n_out_stall > 0, "output back-pressure never happened");
    check(n_b2b > 0, "no back-to-back frames");
    check(n_eos > 0, "no stream close");
    check(n_reopen > 0, "no stream reopen");
    check(n_empty_hdr > 0, "no empty header");
    check(n_black > 0, "no blackout frame");
    check(n_noblack > 0, "no normal frame");
    check(n_interlace > 0, "no interlace found");
    check(n_one_block > 0, "no one-block frame");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
