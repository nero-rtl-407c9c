// tb_nero_pe: test of one NERO processing element for each kernel.
//
// The PE is exercised through a one-PE AFU (control registers and cache-line
// buffer around a single nero_pe), which gives it its job parameters, the host
// streams and an HBM channel model exactly as in the full design. Two PEs are
// built: a vadvc PE with 4x2x16 windows and an hdiff PE with 16x8x2 windows,
// each running 4 windows in HBM mode and then 4 in bypass mode, with random
// back-pressure. Every result beat is compared with the reference model in
// afu_driver. The test also checks that each PE passed through all four phases,
// that its window buffers held two windows at once (the engine computing on one
// while the next is being filled) and that HBM bursts were issued.
module tb_nero_pe;
  import nero_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  initial begin repeat (3) @(posedge clk); rst_n = 1; end

  int checks = 0, failures = 0;

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

  `AFU_INST(v, K_VADVC, 1, 4, 2, 16, 4)
  `AFU_INST(h, K_HDIFF, 1, 16, 8, 2, 4)

  int phases [2][4];
  int double_buf [2];
  initial begin phases = '{default: 0}; double_buf = '{default: 0}; end

  always @(posedge clk) if (rst_n) begin
    if (u_v.g_pe[0].u_pe.busy) phases[0][int'(u_v.g_pe[0].u_pe.phase)]++;
    if (u_h.g_pe[0].u_pe.busy) phases[1][int'(u_h.g_pe[0].u_pe.phase)]++;
    if (u_v.g_pe[0].u_pe.f_held[3] == 2'd2) double_buf[0]++;
    if (u_h.g_pe[0].u_pe.f_held[0] == 2'd2) double_buf[1]++;
  end

  task automatic need(input string what, input int n);
    checks++;
    $display("  %-30s %0d", what, n);
    if (n == 0) begin failures++; $display("  never exercised: %s", what); end
  endtask

  initial begin
    @(posedge rst_n);
    wait (v_finished && h_finished);
    @(posedge clk);
    checks   += v_checks + h_checks;
    failures += v_failures + h_failures;
    for (int k = 0; k < 2; k++) begin
      $display("%s PE:", k == 0 ? "vadvc" : "hdiff");
      need("LOAD cycles", phases[k][0]);
      need("COMPUTE cycles", phases[k][1]);
      need("UNLOAD cycles", phases[k][2]);
      need("BYPASS cycles", phases[k][3]);
      need("double-buffered cycles", double_buf[k]);
    end
    need("HBM write bursts", v_bursts + h_bursts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
