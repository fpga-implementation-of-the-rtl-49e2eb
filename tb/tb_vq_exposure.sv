// tb_vq_exposure: self-checking test of vq_exposure.
//
// Frames of every test picture and of several sizes (down to one block) are
// fed to the unit as tagged microblocks, as vq_frame_ctrl would present them,
// back to back. The per-frame result (the exposure value and the largest and smallest block sums (checked through the blackout rule)) is compared with the reference
// computed from pixel coordinates by tb_vq_pkg::ref_frame. The first frames run
// with en always high and the result must appear 3 enabled cycles after the
// frame's last microblock; later frames toggle en and insert idle cycles at
// random, which must not change any result.
module tb_vq_exposure;
  import vq_pkg::*;
  import tb_vq_pkg::*;

  logic     clk = 1'b0, rst_n = 1'b0, en = 1'b1;
  logic     mb_valid = 1'b0;
  mb_t      mb = '0;
  mb_info_t mb_info = '0;
  logic res_valid; logic [7:0] exposure; block_sum_t max1, min1;

  always #5 clk = ~clk;

  vq_exposure dut (.clk, .rst_n, .en, .mb_valid, .mb, .mb_info, .res_valid, .exposure, .max1, .min1);

  int checks = 0, failures = 0;
  int rnd = 0;
  longint unsigned ecycle = 0, last_at = 0;
  logic [63:0] wantq[$];
  longint unsigned lat_seen[$];

  function automatic logic [7:0] blackout_of(block_sum_t mx, block_sum_t mn);
    return 8'((mx - mn) > 16'd4 ? 0 : 1);
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // count enabled cycles and check results as they appear
  always @(posedge clk) begin
    if (rst_n && en) begin
      ecycle <= ecycle + 1;
      if (res_valid) begin
        logic [63:0] got, want, exp_w;
        ref_t r;
        r = '{default: 0};
        exp_w = wantq.pop_front();
        got = '0;
        got = {56'(exposure), blackout_of(max1, min1)}; want = {56'(r.exposure), 8'(r.blackout)};
        check(got == exp_w, $sformatf("result %h, expected %h", got, exp_w));
        lat_seen.push_back(ecycle - last_at);
      end
    end
  end

  task automatic run_frame(pic_e kind, int unsigned seed, int w, int h);
    ref_t r;
    logic [63:0] got, want;
    r = ref_frame(kind, seed, w, h);
    got = '0;
    got = {56'(exposure), blackout_of(max1, min1)}; want = {56'(r.exposure), 8'(r.blackout)};
    wantq.push_back(want);
    for (int i = 0; i < r.n_mb; i++) begin
      @(negedge clk);
      while (rnd && $urandom_range(3) == 0) begin
        mb_valid = 1'b0;
        en = $urandom_range(1);
        @(negedge clk);
      end
      en = 1'b1;
      mb_valid = 1'b1;
      mb = mb_t'(frame_word(kind, seed, w, i));
      mb_info.first = (i == 0);
      mb_info.last  = (i == r.n_mb - 1);
      mb_info.pos   = mb_pos_e'((i + 1) % 4);
      @(posedge clk);
      if (mb_info.last) last_at = ecycle;
      if (rnd) while ($urandom_range(1) == 0) begin
        @(negedge clk);
        en = 1'b0;
        @(posedge clk);
      end
    end
    @(negedge clk);
    mb_valid = 1'b0;
    en = 1'b1;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 8; k++) run_frame(pic_e'(k), k + 1, 41, 33);
    repeat (6) @(posedge clk);
    check(lat_seen.size() == 8, "missing results in the full-rate part");
    foreach (lat_seen[i])
      check(lat_seen[i] == 3, $sformatf("latency %0d enabled cycles, expected 3", lat_seen[i]));
    rnd = 1;
    for (int k = 0; k < 8; k++) run_frame(pic_e'(k), k + 20, 25, 17);
    run_frame(PIC_RANDOM, 40, 9, 9);
    run_frame(PIC_DARK, 41, 17, 9);
    run_frame(PIC_BLOCKY, 42, 33, 41);
    repeat (10) @(posedge clk);
    check(wantq.size() == 0, $sformatf("%0d results missing", wantq.size()));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
