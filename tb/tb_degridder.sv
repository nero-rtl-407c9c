// tb_degridder: streams 32-bit words into the degridder with random gaps and
// back-pressure and checks that every 16 words form one 512-bit beat (word k in
// lane k), that a 'last' word closes a zero-padded short beat, and that with a
// ready consumer 16 words per beat go through at one word per cycle.
module tb_degridder;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, in_last, out_valid, out_ready, out_last;
  logic [31:0] in_data;
  logic [511:0] out_data;

  degridder dut (.*);

  logic [31:0] wq [$]; logic wql [$];
  logic [511:0] exp_b [$]; logic exp_l [$];
  bit rnd = 0;
  int beats = 0;

  always @(posedge clk) if (rst_n) begin
    if (!in_valid || in_ready) begin
      if (wq.size() && (!rnd || $urandom % 4 != 0)) begin
        in_valid <= 1; in_data <= wq.pop_front(); in_last <= wql.pop_front();
      end else in_valid <= 0;
    end
    out_ready <= !rnd || ($urandom % 3 != 0);
    if (out_valid && out_ready) begin
      checks++; beats++;
      if (!exp_b.size() || out_data !== exp_b[0] || out_last !== exp_l[0]) begin
        failures++; $display("beat %0d mismatch", beats);
      end
      if (exp_b.size()) begin void'(exp_b.pop_front()); void'(exp_l.pop_front()); end
    end
  end

  // queue n words, the last flagged if 'last'; build the expected beats
  task automatic add_words(input int n, input logic last);
    logic [511:0] b;
    int k;
    b = '0; k = 0;
    for (int i = 0; i < n; i++) begin
      logic [31:0] w;
      w = $urandom;
      wq.push_back(w); wql.push_back(last && i == n - 1);
      b[32*k +: 32] = w; k++;
      if (k == 16 || (last && i == n - 1)) begin
        exp_b.push_back(b); exp_l.push_back(last && i == n - 1);
        b = '0; k = 0;
      end
    end
  endtask

  initial begin
    int t0;
    in_valid = 0; in_last = 0; in_data = '0; out_ready = 1;
    repeat (3) @(posedge clk); rst_n = 1;
    add_words(160, 1'b1);
    t0 = $time;
    while (exp_b.size()) @(posedge clk);
    checks++;
    if (($time - t0) / 10 > 166) begin failures++; $display("slow %0d", ($time - t0) / 10); end
    rnd = 1;
    add_words(37, 1'b1);     // 2 full beats + a 5-word padded beat
    add_words(64, 1'b0);
    add_words(3, 1'b1);
    while (exp_b.size()) @(posedge clk);
    repeat (5) @(posedge clk);
    checks++; if (beats != 10 + 3 + 4 + 1) begin failures++; $display("beats %0d", beats); end
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
