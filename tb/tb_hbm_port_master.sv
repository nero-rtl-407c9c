// tb_hbm_port_master: writes a 37-beat block through the AXI3 master into the
// behavioural HBM model (which stalls its ready signals at random), then reads
// it back and compares. Checks burst lengths (at most 16 beats, AXI3), wlast on
// every burst's final beat, burst alignment, the read stream's 'last', and one
// 'done' pulse per job.
module tb_hbm_port_master;
  import nero_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done;
  logic [HBM_AW-1:0] rd_base, wr_base;
  logic [31:0] rd_beats, wr_beats;
  logic ar_valid, ar_ready, r_valid, r_ready, aw_valid, aw_ready, w_valid, w_ready, b_valid, b_ready;
  axi_addr_t ar, aw;
  axi_r_t r;
  axi_w_t w;
  logic rd_valid, rd_ready, rd_last, wr_valid, wr_ready;
  logic [HBM_W-1:0] rd_data, wr_data;

  hbm_port_master dut (.*);
  hbm_model #(.LAT(3), .STALL(1'b1)) mem (.clk, .ar_valid, .ar_ready, .ar, .r_valid, .r_ready, .r,
    .aw_valid, .aw_ready, .aw, .w_valid, .w_ready, .w, .b_valid, .b_ready);

  logic [HBM_W-1:0] wq [$];
  logic [HBM_W-1:0] exp_r [$];
  int rcount = 0, lasts = 0, done_seen = 0;

  always @(posedge clk) if (rst_n) begin
    if (!wr_valid || wr_ready) begin
      if (wq.size() && $urandom % 4 != 0) begin wr_valid <= 1; wr_data <= wq.pop_front(); end
      else wr_valid <= 0;
    end
    rd_ready <= $urandom % 4 != 0;
    if (rd_valid && rd_ready) begin
      checks++; rcount++;
      if (!exp_r.size() || rd_data !== exp_r[0]) begin failures++; $display("read beat %0d wrong", rcount); end
      if (exp_r.size()) void'(exp_r.pop_front());
      if (rd_last) lasts++;
    end
    if (ar_valid && ar_ready && ar.addr[8:0] != 9'd0) begin failures++; $display("unaligned burst"); end
    if (done) done_seen++;
  end

  task automatic run_job();
    start <= 1; @(posedge clk); start <= 0;
    @(posedge clk);
    while (!done) @(posedge clk);
    @(posedge clk);
  endtask

  initial begin
    logic [HBM_W-1:0] blk [37];
    start = 0; rd_base = '0; wr_base = '0; rd_beats = 0; wr_beats = 0; wr_valid = 0; wr_data = '0; rd_ready = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int i = 0; i < 37; i++) begin blk[i] = {8{$urandom}}; wq.push_back(blk[i]); end
    wr_base <= 33'h1_0000_0200; wr_beats <= 37; rd_beats <= 0;
    run_job();
    checks++; if (mem.protocol_errors != 0) begin failures++; $display("wlast errors %0d", mem.protocol_errors); end
    checks++; if (busy) begin failures++; $display("busy after done"); end
    // read back
    for (int i = 0; i < 37; i++) exp_r.push_back(blk[i]);
    rd_base <= 33'h1_0000_0200; rd_beats <= 37; wr_beats <= 0;
    run_job();
    checks++; if (rcount != 37 || lasts != 1) begin failures++; $display("reads %0d lasts %0d", rcount, lasts); end
    checks++; if (mem.max_len_seen != 16) begin failures++; $display("max burst %0d", mem.max_len_seen); end
    checks++; if (done_seen != 2) begin failures++; $display("done pulses %0d", done_seen); end
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
