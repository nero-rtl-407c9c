// tb_cacheline_buffer: checks that 512-bit beats leave the cache-line buffer in
// order, that a half line closed by 'last' comes out as one beat, that the
// buffer holds exactly 64 lines before it pushes back, and that a full buffer
// drains at one beat per cycle.
module tb_cacheline_buffer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, in_last, out_valid, out_ready, out_last;
  logic [511:0] in_data, out_data;
  logic [6:0] level;

  cacheline_buffer dut (.*);

  logic [511:0] sent [$];
  logic         sent_last [$];

  // source: a queue of beats driven at the clock edge
  logic [511:0] q_data [$];
  logic         q_last [$];
  logic         src_on = 1;
  task automatic push(input logic [511:0] d, input logic l);
    q_data.push_back(d); q_last.push_back(l);
  endtask
  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      sent.push_back(in_data); sent_last.push_back(in_last);
    end
    if (!in_valid || in_ready) begin
      if (q_data.size() != 0 && src_on) begin
        in_valid <= 1; in_data <= q_data.pop_front(); in_last <= q_last.pop_front();
      end else in_valid <= 0;
    end
  end

  // consumer: compares every beat with what was sent
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (sent.size() == 0 || out_data !== sent[0] || out_last !== sent_last[0]) begin
      failures++;
      $display("mismatch at beat, expected %h got %h", sent.size() ? sent[0][31:0] : 0, out_data[31:0]);
    end
    if (sent.size()) begin void'(sent.pop_front()); void'(sent_last.pop_front()); end
  end

  initial begin
    in_valid = 0; in_last = 0; in_data = '0; out_ready = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    // fill with 64 full lines while the consumer is stalled
    for (int i = 0; i < 130; i++) push({16{32'(i)}} ^ {$urandom, $urandom}, 1'b0);
    repeat (140) @(posedge clk);
    checks++; if (level != 7'd64) begin failures++; $display("level %0d", level); end
    checks++; if (in_ready) begin failures++; $display("in_ready high when full"); end
    // drain at full rate and count cycles
    begin
      int t0, n;
      out_ready <= 1;
      t0 = $time; n = 0;
      while (sent.size() != 0 || q_data.size() != 0 || in_valid) @(posedge clk);
      n = ($time - t0) / 10;
      checks++; if (n > 134) begin failures++; $display("drain took %0d cycles", n); end
    end
    // odd transfer: three beats, the last closing a half line
    push(512'h1, 1'b0); push(512'h2, 1'b0); push(512'h3, 1'b1);
    // random traffic with a random consumer
    for (int i = 0; i < 300; i++) push({$urandom, 480'(i)}, (i % 37) == 36);
    push(512'h5, 1'b1);
    repeat (900) begin @(posedge clk); out_ready <= $urandom % 3 != 0; src_on <= $urandom % 4 != 0; end
    src_on <= 1;
    out_ready <= 1;
    repeat (50) @(posedge clk);
    checks++; if (sent.size() != 0 || q_data.size() != 0) begin failures++; $display("%0d beats lost", sent.size()); end
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
