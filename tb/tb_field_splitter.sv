// tb_field_splitter: sends a beat-interleaved stream of four fields through the
// splitter with independent random back-pressure on every field output and
// checks that each field receives exactly its beats, in order, and that the
// field counter restarts at field 0 after 'last'.
module tb_field_splitter;
  localparam int NF = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, in_last;
  logic [511:0] in_data, out_data;
  logic [NF-1:0] out_valid, out_ready;
  logic [1:0] cur_field;

  field_splitter #(.NUM_FIELDS(NF)) dut (.*);

  logic [511:0] src [$]; logic srcl [$];
  logic [511:0] exp_f [NF][$];
  int got [NF];
  bit rnd = 1;

  always @(posedge clk) if (rst_n) begin
    if (!in_valid || in_ready) begin
      if (src.size() && $urandom % 4 != 0) begin
        in_valid <= 1; in_data <= src.pop_front(); in_last <= srcl.pop_front();
      end else in_valid <= 0;
    end
    for (int f = 0; f < NF; f++) out_ready[f] <= !rnd || ($urandom % 3 != 0);
    for (int f = 0; f < NF; f++) if (out_valid[f] && out_ready[f]) begin
      checks++; got[f]++;
      if (!exp_f[f].size() || out_data !== exp_f[f][0]) begin
        failures++; $display("field %0d mismatch", f);
      end
      if (exp_f[f].size()) void'(exp_f[f].pop_front());
    end
    if ($countones(out_valid) > 1) begin failures++; $display("two fields valid"); end
  end

  initial begin
    in_valid = 0; in_last = 0; in_data = '0; out_ready = '0;
    foreach (got[f]) got[f] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // 100 groups of four fields
    for (int i = 0; i < 400; i++) begin
      logic [511:0] d;
      d = {$urandom, 448'(i), 32'(i % NF)};
      src.push_back(d); srcl.push_back(1'b0);
      exp_f[i % NF].push_back(d);
    end
    // a short group closed by 'last' (fields 0 and 1), then a full group again
    src.push_back(512'h10); srcl.push_back(1'b0); exp_f[0].push_back(512'h10);
    src.push_back(512'h11); srcl.push_back(1'b1); exp_f[1].push_back(512'h11);
    for (int f = 0; f < NF; f++) begin
      src.push_back(512'(f + 32)); srcl.push_back(1'b0); exp_f[f].push_back(512'(f + 32));
    end
    repeat (3000) @(posedge clk);
    for (int f = 0; f < NF; f++) begin
      checks++;
      if (exp_f[f].size() != 0) begin failures++; $display("field %0d missing %0d", f, exp_f[f].size()); end
    end
    checks++;
    if (got[0] != 102 || got[1] != 102 || got[2] != 101 || got[3] != 101) begin
      failures++; $display("counts %0d %0d %0d %0d", got[0], got[1], got[2], got[3]);
    end
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
