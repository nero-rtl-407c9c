// tb_nero_afu: end-to-end test of the NERO AFU with both stencil kernels.
//
// Two reduced-size AFUs run side by side, each driven by an afu_driver (host
// control and data streams plus one behavioural HBM channel per PE):
//   - vadvc: 3 PEs, 2x2x8 windows, 12 windows per PE;
//   - hdiff: 2 PEs, 8x8x2 windows, 6 windows per PE.
// Each runs one job in HBM mode (load, compute, unload) and one in bypass mode,
// with random host back-pressure, source gaps and HBM ready stalls. The driver
// compares every result beat against its own reference model.
//
// Mechanisms counted here, each of which must occur at least once (a mechanism
// that never happened counts as a failure): HBM-mode job, bypass job, interrupt,
// HBM write bursts, cache-line buffer full (input back-pressure), host output
// back-pressure, each PE phase (LOAD, COMPUTE, UNLOAD, BYPASS), a window buffer
// holding two windows at once (double buffering), and an engine stalled by its
// output. Reduced sizes keep run time short; the full-size configuration is
// covered by tb_nero_afu_full.
module tb_nero_afu;
  import nero_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  initial begin repeat (3) @(posedge clk); rst_n = 1; end

  int checks = 0, failures = 0;

  // ---- one AFU plus its driver per kernel ----
  `define AFU_INST(NAME, KERN, NPE, X, Y, Z, NW)                                                  \
  logic NAME``_awvalid, NAME``_awready, NAME``_wvalid, NAME``_wready, NAME``_bvalid, NAME``_bready; \
  logic NAME``_arvalid, NAME``_arready, NAME``_rvalid, NAME``_rready, NAME``_irq;                 \
  logic [7:0] NAME``_awaddr, NAME``_araddr;                                                       \
  logic [31:0] NAME``_wdata, NAME``_rdata;                                                        \
  logic NAME``_iv, NAME``_ir, NAME``_il, NAME``_ov, NAME``_or, NAME``_ol;                          \
  logic [CAPI_W-1:0] NAME``_id, NAME``_od;                                                        \
  logic NAME``_arv [NPE], NAME``_arr [NPE], NAME``_rv [NPE], NAME``_rr [NPE];                     \
  logic NAME``_awv [NPE], NAME``_awr [NPE], NAME``_wv [NPE], NAME``_wr [NPE];                     \
  logic NAME``_bv [NPE], NAME``_br [NPE];                                                         \
  axi_addr_t NAME``_ar [NPE], NAME``_aw [NPE];                                                    \
  axi_r_t NAME``_r [NPE];                                                                         \
  axi_w_t NAME``_w [NPE];                                                                         \
  int NAME``_checks, NAME``_failures, NAME``_hbm_jobs, NAME``_bypass_jobs, NAME``_irqs;           \
  int NAME``_in_stalls, NAME``_out_stalls, NAME``_bursts, NAME``_cycles;                          \
  logic NAME``_finished;                                                                          \
  nero_afu #(.KERNEL(KERN), .NUM_PE(NPE), .TX(X), .TY(Y), .TZ(Z)) u_``NAME (                      \
    .clk, .rst_n,                                                                                 \
    .s_awvalid(NAME``_awvalid), .s_awready(NAME``_awready), .s_awaddr(NAME``_awaddr),             \
    .s_wvalid(NAME``_wvalid), .s_wready(NAME``_wready), .s_wdata(NAME``_wdata),                   \
    .s_bvalid(NAME``_bvalid), .s_bready(NAME``_bready),                                           \
    .s_arvalid(NAME``_arvalid), .s_arready(NAME``_arready), .s_araddr(NAME``_araddr),             \
    .s_rvalid(NAME``_rvalid), .s_rready(NAME``_rready), .s_rdata(NAME``_rdata),                   \
    .irq(NAME``_irq),                                                                             \
    .host_in_valid(NAME``_iv), .host_in_ready(NAME``_ir), .host_in_data(NAME``_id),               \
    .host_in_last(NAME``_il),                                                                     \
    .host_out_valid(NAME``_ov), .host_out_ready(NAME``_or), .host_out_data(NAME``_od),            \
    .host_out_last(NAME``_ol),                                                                    \
    .hbm_ar_valid(NAME``_arv), .hbm_ar_ready(NAME``_arr), .hbm_ar(NAME``_ar),                     \
    .hbm_r_valid(NAME``_rv), .hbm_r_ready(NAME``_rr), .hbm_r(NAME``_r),                           \
    .hbm_aw_valid(NAME``_awv), .hbm_aw_ready(NAME``_awr), .hbm_aw(NAME``_aw),                     \
    .hbm_w_valid(NAME``_wv), .hbm_w_ready(NAME``_wr), .hbm_w(NAME``_w),                           \
    .hbm_b_valid(NAME``_bv), .hbm_b_ready(NAME``_br)                                              \
  );                                                                                              \
  afu_driver #(.KERNEL(KERN), .NUM_PE(NPE), .TX(X), .TY(Y), .TZ(Z), .NUM_WIN(NW)) u_drv_``NAME (  \
    .clk, .rst_n,                                                                                 \
    .s_awvalid(NAME``_awvalid), .s_awready(NAME``_awready), .s_awaddr(NAME``_awaddr),             \
    .s_wvalid(NAME``_wvalid), .s_wready(NAME``_wready), .s_wdata(NAME``_wdata),                   \
    .s_bvalid(NAME``_bvalid), .s_bready(NAME``_bready),                                           \
    .s_arvalid(NAME``_arvalid), .s_arready(NAME``_arready), .s_araddr(NAME``_araddr),             \
    .s_rvalid(NAME``_rvalid), .s_rready(NAME``_rready), .s_rdata(NAME``_rdata),                   \
    .irq(NAME``_irq),                                                                             \
    .host_in_valid(NAME``_iv), .host_in_ready(NAME``_ir), .host_in_data(NAME``_id),               \
    .host_in_last(NAME``_il),                                                                     \
    .host_out_valid(NAME``_ov), .host_out_ready(NAME``_or), .host_out_data(NAME``_od),            \
    .host_out_last(NAME``_ol),                                                                    \
    .hbm_ar_valid(NAME``_arv), .hbm_ar_ready(NAME``_arr), .hbm_ar(NAME``_ar),                     \
    .hbm_r_valid(NAME``_rv), .hbm_r_ready(NAME``_rr), .hbm_r(NAME``_r),                           \
    .hbm_aw_valid(NAME``_awv), .hbm_aw_ready(NAME``_awr), .hbm_aw(NAME``_aw),                     \
    .hbm_w_valid(NAME``_wv), .hbm_w_ready(NAME``_wr), .hbm_w(NAME``_w),                           \
    .hbm_b_valid(NAME``_bv), .hbm_b_ready(NAME``_br),                                             \
    .checks(NAME``_checks), .failures(NAME``_failures), .finished(NAME``_finished),               \
    .hbm_jobs(NAME``_hbm_jobs), .bypass_jobs(NAME``_bypass_jobs), .irqs(NAME``_irqs),             \
    .in_stalls(NAME``_in_stalls), .out_stalls(NAME``_out_stalls), .hbm_bursts(NAME``_bursts),     \
    .job_cycles(NAME``_cycles)                                                                    \
  );

  `AFU_INST(v, K_VADVC, 3, 2, 2, 8, 12)
  `AFU_INST(h, K_HDIFF, 2, 8, 8, 2, 6)

  // ---- mechanism counters observed inside the AFUs ----
  int ph_load = 0, ph_compute = 0, ph_unload = 0, ph_bypass = 0;
  int double_buf = 0, cl_full = 0, eng_stall = 0;

  always @(posedge clk) if (rst_n) begin
    if (u_v.g_pe[0].u_pe.busy) begin
      unique case (u_v.g_pe[0].u_pe.phase)
        PH_LOAD:    ph_load++;
        PH_COMPUTE: ph_compute++;
        PH_UNLOAD:  ph_unload++;
        PH_BYPASS:  ph_bypass++;
      endcase
    end
    if (u_v.g_pe[0].u_pe.f_held[0] == 2'd2) double_buf++;
    if (u_h.g_pe[1].u_pe.f_held[0] == 2'd2) double_buf++;
    if (u_v.cb_level == 7'd64 || u_h.cb_level == 7'd64) cl_full++;
    if (u_h.g_pe[0].u_pe.g_hdiff.u_engine.out_valid && !u_h.g_pe[0].u_pe.g_hdiff.u_engine.out_ready)
      eng_stall++;
  end

  task automatic need(input string what, input int n);
    checks++;
    $display("  %-34s %0d", what, n);
    if (n == 0) begin failures++; $display("  mechanism never exercised: %s", what); end
  endtask

  initial begin
    @(posedge rst_n);
    wait (v_finished && h_finished);
    @(posedge clk);
    checks   += v_checks + h_checks;
    failures += v_failures + h_failures;
    $display("bypass job cycles: vadvc %0d, hdiff %0d", v_cycles, h_cycles);
    $display("mechanisms:");
    need("HBM-mode jobs", v_hbm_jobs + h_hbm_jobs);
    need("bypass jobs", v_bypass_jobs + h_bypass_jobs);
    need("interrupts", v_irqs + h_irqs);
    need("HBM write bursts", v_bursts + h_bursts);
    need("PE phase LOAD cycles", ph_load);
    need("PE phase COMPUTE cycles", ph_compute);
    need("PE phase UNLOAD cycles", ph_unload);
    need("PE phase BYPASS cycles", ph_bypass);
    need("double-buffered windows (cycles)", double_buf);
    need("cache-line buffer full (cycles)", cl_full);
    need("host input stalls", v_in_stalls + h_in_stalls);
    need("host output stalls", v_out_stalls + h_out_stalls);
    need("engine output stalls", eng_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
