// tb_stream_converter: checks both directions of the 256/512-bit converter:
// pairs of narrow beats form one wide beat (first beat low), a 'last' on an odd
// beat gives a zero upper half, wide beats split low half first with 'last' on
// the second half, and both paths run at one narrow beat per cycle.
module tb_stream_converter;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic n_in_valid, n_in_ready, n_in_last, w_out_valid, w_out_ready, w_out_last;
  logic [255:0] n_in_data, n_out_data;
  logic [511:0] w_out_data, w_in_data;
  logic w_in_valid, w_in_ready, w_in_last, n_out_valid, n_out_ready, n_out_last;

  stream_converter dut (.*);

  // narrow source
  logic [255:0] nq [$]; logic nql [$];
  logic [511:0] wq [$]; logic wql [$];
  logic [511:0] exp_w [$]; logic exp_wl [$];
  logic [255:0] exp_n [$]; logic exp_nl [$];
  bit rnd = 0;
  int n_out_cnt = 0, w_out_cnt = 0;

  always @(posedge clk) if (rst_n) begin
    if (!n_in_valid || n_in_ready) begin
      if (nq.size() && (!rnd || $urandom % 3 != 0)) begin
        n_in_valid <= 1; n_in_data <= nq.pop_front(); n_in_last <= nql.pop_front();
      end else n_in_valid <= 0;
    end
    if (!w_in_valid || w_in_ready) begin
      if (wq.size() && (!rnd || $urandom % 3 != 0)) begin
        w_in_valid <= 1; w_in_data <= wq.pop_front(); w_in_last <= wql.pop_front();
      end else w_in_valid <= 0;
    end
    w_out_ready <= !rnd || ($urandom % 3 != 0);
    n_out_ready <= !rnd || ($urandom % 3 != 0);
    if (w_out_valid && w_out_ready) begin
      checks++; w_out_cnt++;
      if (!exp_w.size() || w_out_data !== exp_w[0] || w_out_last !== exp_wl[0]) begin
        failures++; $display("wide mismatch");
      end
      if (exp_w.size()) begin void'(exp_w.pop_front()); void'(exp_wl.pop_front()); end
    end
    if (n_out_valid && n_out_ready) begin
      checks++; n_out_cnt++;
      if (!exp_n.size() || n_out_data !== exp_n[0] || n_out_last !== exp_nl[0]) begin
        failures++; $display("narrow mismatch");
      end
      if (exp_n.size()) begin void'(exp_n.pop_front()); void'(exp_nl.pop_front()); end
    end
  end

  task automatic add_pair(input logic [255:0] a, input logic [255:0] b, input logic last);
    nq.push_back(a); nql.push_back(1'b0); nq.push_back(b); nql.push_back(last);
    exp_w.push_back({b, a}); exp_wl.push_back(last);
  endtask

  task automatic add_wide(input logic [511:0] d, input logic last);
    wq.push_back(d); wql.push_back(last);
    exp_n.push_back(d[255:0]); exp_nl.push_back(1'b0);
    exp_n.push_back(d[511:256]); exp_nl.push_back(last);
  endtask

  initial begin
    int t0;
    n_in_valid = 0; w_in_valid = 0; n_in_last = 0; w_in_last = 0;
    n_in_data = '0; w_in_data = '0; w_out_ready = 1; n_out_ready = 1;
    repeat (3) @(posedge clk); rst_n = 1;
    // full-rate phase: 64 narrow beats each way
    for (int i = 0; i < 32; i++) add_pair({8{$urandom}}, {8{$urandom}}, i == 31);
    for (int i = 0; i < 32; i++) add_wide({16{$urandom}}, i == 31);
    t0 = $time;
    while (exp_w.size() || exp_n.size()) @(posedge clk);
    checks++;
    if (($time - t0) / 10 > 70) begin failures++; $display("slow: %0d cycles", ($time - t0) / 10); end
    // odd-length transfer on the up path
    nq.push_back(256'hAB); nql.push_back(1'b1);
    exp_w.push_back({256'h0, 256'hAB}); exp_wl.push_back(1'b1);
    // random back-pressure phase
    rnd = 1;
    for (int i = 0; i < 200; i++) begin
      add_pair({8{$urandom}}, {8{$urandom}}, (i % 9) == 8);
      add_wide({16{$urandom}}, (i % 7) == 6);
    end
    while (exp_w.size() || exp_n.size()) @(posedge clk);
    checks++;
    if (w_out_cnt != 233 || n_out_cnt != 464) begin failures++; $display("counts %0d %0d", w_out_cnt, n_out_cnt); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
