// tb_nero_afu_full: end-to-end run of the AFU at its full default size: the
// vadvc configuration with 14 PEs, each with its own HBM channel model, and
// 64x2x64 float32 windows (4 input fields of 8192 words per window).
//
// The AFU and the driver are both instantiated with their default parameters.
// One window per PE is processed in HBM mode (load 2048 input beats per PE into
// HBM, compute, unload 512 result beats per PE) and then in bypass mode, with
// random host and HBM back-pressure; every result word of all 14 PEs is compared
// with the driver's double-precision Thomas-algorithm reference. The run also
// checks that every PE's HBM channel received write bursts, that all PEs were
// computing at the same time, and reports the cycle count of the last job.
module tb_nero_afu_full;
  import nero_pkg::*;

  localparam int unsigned NUM_PE = 14;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  initial begin repeat (3) @(posedge clk); rst_n = 1; end

  int checks = 0, failures = 0;

  logic f_awvalid, f_awready, f_wvalid, f_wready, f_bvalid, f_bready;
  logic f_arvalid, f_arready, f_rvalid, f_rready, f_irq;
  logic [7:0] f_awaddr, f_araddr;
  logic [31:0] f_wdata, f_rdata;
  logic f_iv, f_ir, f_il, f_ov, f_or, f_ol;
  logic [CAPI_W-1:0] f_id, f_od;
  logic f_arv [NUM_PE], f_arr [NUM_PE], f_rv [NUM_PE], f_rr [NUM_PE];
  logic f_awv [NUM_PE], f_awr [NUM_PE], f_wv [NUM_PE], f_wr [NUM_PE];
  logic f_bv [NUM_PE], f_br [NUM_PE];
  axi_addr_t f_ar [NUM_PE], f_aw [NUM_PE];
  axi_r_t f_r [NUM_PE];
  axi_w_t f_w [NUM_PE];
  int f_checks, f_failures, f_hbm_jobs, f_bypass_jobs, f_irqs;
  int f_in_stalls, f_out_stalls, f_bursts, f_cycles;
  logic f_finished;
  nero_afu u_afu (
    .clk, .rst_n,
    .s_awvalid(f_awvalid), .s_awready(f_awready), .s_awaddr(f_awaddr),
    .s_wvalid(f_wvalid), .s_wready(f_wready), .s_wdata(f_wdata),
    .s_bvalid(f_bvalid), .s_bready(f_bready),
    .s_arvalid(f_arvalid), .s_arready(f_arready), .s_araddr(f_araddr),
    .s_rvalid(f_rvalid), .s_rready(f_rready), .s_rdata(f_rdata),
    .irq(f_irq),
    .host_in_valid(f_iv), .host_in_ready(f_ir), .host_in_data(f_id),
    .host_in_last(f_il),
    .host_out_valid(f_ov), .host_out_ready(f_or), .host_out_data(f_od),
    .host_out_last(f_ol),
    .hbm_ar_valid(f_arv), .hbm_ar_ready(f_arr), .hbm_ar(f_ar),
    .hbm_r_valid(f_rv), .hbm_r_ready(f_rr), .hbm_r(f_r),
    .hbm_aw_valid(f_awv), .hbm_aw_ready(f_awr), .hbm_aw(f_aw),
    .hbm_w_valid(f_wv), .hbm_w_ready(f_wr), .hbm_w(f_w),
    .hbm_b_valid(f_bv), .hbm_b_ready(f_br)
  );
  afu_driver u_drv (
    .clk, .rst_n,
    .s_awvalid(f_awvalid), .s_awready(f_awready), .s_awaddr(f_awaddr),
    .s_wvalid(f_wvalid), .s_wready(f_wready), .s_wdata(f_wdata),
    .s_bvalid(f_bvalid), .s_bready(f_bready),
    .s_arvalid(f_arvalid), .s_arready(f_arready), .s_araddr(f_araddr),
    .s_rvalid(f_rvalid), .s_rready(f_rready), .s_rdata(f_rdata),
    .irq(f_irq),
    .host_in_valid(f_iv), .host_in_ready(f_ir), .host_in_data(f_id),
    .host_in_last(f_il),
    .host_out_valid(f_ov), .host_out_ready(f_or), .host_out_data(f_od),
    .host_out_last(f_ol),
    .hbm_ar_valid(f_arv), .hbm_ar_ready(f_arr), .hbm_ar(f_ar),
    .hbm_r_valid(f_rv), .hbm_r_ready(f_rr), .hbm_r(f_r),
    .hbm_aw_valid(f_awv), .hbm_aw_ready(f_awr), .hbm_aw(f_aw),
    .hbm_w_valid(f_wv), .hbm_w_ready(f_wr), .hbm_w(f_w),
    .hbm_b_valid(f_bv), .hbm_b_ready(f_br),
    .checks(f_checks), .failures(f_failures), .finished(f_finished),
    .hbm_jobs(f_hbm_jobs), .bypass_jobs(f_bypass_jobs), .irqs(f_irqs),
    .in_stalls(f_in_stalls), .out_stalls(f_out_stalls), .hbm_bursts(f_bursts),
    .job_cycles(f_cycles)
  );


  // ---- mechanisms ----
  int pe_bursts [NUM_PE];
  int max_parallel = 0;
  initial pe_bursts = '{default: 0};

  always @(posedge clk) if (rst_n) begin
    int n;
    n = 0;
    for (int p = 0; p < int'(NUM_PE); p++) begin
      if (f_awv[p] && f_awr[p]) pe_bursts[p]++;
      if (u_afu.pe_phase[p] inside {PH_COMPUTE, PH_BYPASS} && u_afu.pe_busy[p]) n++;
    end
    if (n > max_parallel) max_parallel = n;
  end

  initial begin
    @(posedge rst_n);
    wait (f_finished);
    @(posedge clk);
    checks   += f_checks;
    failures += f_failures;
    $display("bypass job: %0d cycles; PEs computing at once: %0d", f_cycles, max_parallel);
    for (int p = 0; p < int'(NUM_PE); p++) begin
      checks++;
      if (pe_bursts[p] == 0) begin failures++; $display("PE %0d issued no HBM write bursts", p); end
    end
    checks++;
    if (max_parallel != int'(NUM_PE)) begin failures++; $display("not all PEs computed in parallel"); end
    checks++;
    if (f_hbm_jobs != 1 || f_bypass_jobs != 1 || f_irqs != 2) begin
      failures++; $display("jobs: hbm %0d bypass %0d irqs %0d", f_hbm_jobs, f_bypass_jobs, f_irqs);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
