// tb_vq_stream_fifo: self-checking test of vq_stream_fifo (depth 4).
//
// A writer and a reader run with random activity; every word read is
// compared with a queue model, in_ready must be low exactly when four words
// are stored and out_valid high exactly when at least one is. A final phase
// writes and reads every cycle and checks that the stream passes at one word
// per clock.
module tb_vq_stream_fifo;
  localparam int W = 129, D = 4;

  logic         clk = 1'b0, rst_n = 1'b0;
  logic         in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0;
  logic [W-1:0] in_data = '0, out_data;
  logic [W-1:0] model[$];
  int checks = 0, failures = 0, n_full = 0, n_read = 0;
  int wr_pct = 50, rd_pct = 50;

  always #5 clk = ~clk;

  vq_stream_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  always @(negedge clk) begin
    in_valid = ($urandom_range(99) < wr_pct);
    in_data  = {$urandom, $urandom, $urandom, $urandom, 1'($urandom)};
    out_ready = ($urandom_range(99) < rd_pct);
  end

  always @(posedge clk) begin
    if (rst_n) begin
      check(in_ready == (model.size() < D), $sformatf("in_ready %0d with %0d stored", in_ready, model.size()));
      check(out_valid == (model.size() > 0), $sformatf("out_valid %0d with %0d stored", out_valid, model.size()));
      if (!in_ready) n_full++;
      if (out_valid && out_ready) begin
        check(out_data == model[0], $sformatf("read %h, expected %h", out_data, model[0]));
        void'(model.pop_front());
        n_read++;
      end
      if (in_valid && in_ready) model.push_back(in_data);
    end
  end

  initial begin
    int n_before;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    repeat (2000) @(posedge clk);
    wr_pct = 80; rd_pct = 20;
    repeat (500) @(posedge clk);
    wr_pct = 20; rd_pct = 80;
    repeat (500) @(posedge clk);
    // full rate: one word per clock
    wr_pct = 100; rd_pct = 100;
    repeat (10) @(posedge clk);
    n_before = n_read;
    repeat (100) @(posedge clk);
    check(n_read - n_before == 100, $sformatf("%0d words in 100 clocks at full rate", n_read - n_before));
    check(n_full > 0, "never full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
