// afu_driver: testbench stand-in for everything around a nero_afu: the host
// (control over AXI4-Lite, data over the 512-bit streams) and one behavioural
// HBM pseudo-channel (hbm_model) per PE.
//
// It runs two jobs of NUM_WIN windows per PE: first in HBM mode (load into HBM,
// compute, unload), then in bypass mode, each with fresh random data. The input
// of PE p is packed the way the AFU expects it (for each window, the fields
// interleaved beat by beat, 16 floats per beat), and the expected results are
// computed here independently in double precision (Thomas algorithm for vadvc,
// Laplacian/flux stencil for hdiff), packed into beats, and compared with every
// beat that leaves on host_out. Between jobs it waits for the interrupt, checks
// STATUS and clears DONE. Host-side back-pressure and source gaps are random
// when RANDOM_STALLS is set. It counts how often the mechanisms of the design
// were exercised and reports them through its outputs.
module afu_driver
  import nero_pkg::*;
  import fp32_pkg::*;
  import tb_fp_pkg::*;
#(
  parameter kernel_e     KERNEL        = K_VADVC,
  parameter int unsigned NUM_PE        = 14,
  parameter int unsigned TX            = 64,
  parameter int unsigned TY            = 2,
  parameter int unsigned TZ            = 64,
  parameter int unsigned NUM_WIN       = 1,
  parameter bit          RANDOM_STALLS = 1'b1,
  parameter bit          RUN_BYPASS    = 1'b1
) (
  input  logic              clk,
  input  logic              rst_n,
  output logic              s_awvalid,
  input  logic              s_awready,
  output logic [7:0]        s_awaddr,
  output logic              s_wvalid,
  input  logic              s_wready,
  output logic [31:0]       s_wdata,
  input  logic              s_bvalid,
  output logic              s_bready,
  output logic              s_arvalid,
  input  logic              s_arready,
  output logic [7:0]        s_araddr,
  input  logic              s_rvalid,
  output logic              s_rready,
  input  logic [31:0]       s_rdata,
  input  logic              irq,
  output logic              host_in_valid,
  input  logic              host_in_ready,
  output logic [CAPI_W-1:0] host_in_data,
  output logic              host_in_last,
  input  logic              host_out_valid,
  output logic              host_out_ready,
  input  logic [CAPI_W-1:0] host_out_data,
  input  logic              host_out_last,
  input  logic              hbm_ar_valid [NUM_PE],
  output logic              hbm_ar_ready [NUM_PE],
  input  axi_addr_t         hbm_ar       [NUM_PE],
  output logic              hbm_r_valid  [NUM_PE],
  input  logic              hbm_r_ready  [NUM_PE],
  output axi_r_t            hbm_r        [NUM_PE],
  input  logic              hbm_aw_valid [NUM_PE],
  output logic              hbm_aw_ready [NUM_PE],
  input  axi_addr_t         hbm_aw       [NUM_PE],
  input  logic              hbm_w_valid  [NUM_PE],
  output logic              hbm_w_ready  [NUM_PE],
  input  axi_w_t            hbm_w        [NUM_PE],
  output logic              hbm_b_valid  [NUM_PE],
  input  logic              hbm_b_ready  [NUM_PE],
  output int                checks,
  output int                failures,
  output logic              finished,
  output int                hbm_jobs,
  output int                bypass_jobs,
  output int                irqs,
  output int                in_stalls,
  output int                out_stalls,
  output int                hbm_bursts,
  output int                job_cycles
);

  localparam int unsigned NF        = num_fields(KERNEL);
  localparam int unsigned WIN_WORDS = TX * TY * TZ;
  localparam int unsigned OUT_WORDS = (KERNEL == K_VADVC) ? WIN_WORDS : TZ * (TX - 4) * (TY - 4);

  // ---------------- HBM pseudo-channels ----------------
  for (genvar p = 0; p < NUM_PE; p++) begin : g_hbm
    hbm_model #(.LAT(6), .STALL(RANDOM_STALLS)) u_hbm (
      .clk, .ar_valid(hbm_ar_valid[p]), .ar_ready(hbm_ar_ready[p]), .ar(hbm_ar[p]),
      .r_valid(hbm_r_valid[p]), .r_ready(hbm_r_ready[p]), .r(hbm_r[p]),
      .aw_valid(hbm_aw_valid[p]), .aw_ready(hbm_aw_ready[p]), .aw(hbm_aw[p]),
      .w_valid(hbm_w_valid[p]), .w_ready(hbm_w_ready[p]), .w(hbm_w[p]),
      .b_valid(hbm_b_valid[p]), .b_ready(hbm_b_ready[p])
    );
  end

  // ---------------- host data streams ----------------
  logic [CAPI_W-1:0] in_q [$];
  logic [CAPI_W-1:0] exp_q [$];
  int                out_beats;
  bit                src_gap;
  int                blackout;

  always @(posedge clk) if (rst_n) begin
    if (!host_in_valid || host_in_ready) begin
      if (in_q.size() != 0 && !src_gap) begin
        host_in_valid <= 1'b1;
        host_in_data  <= in_q.pop_front();
        host_in_last  <= (in_q.size() == 0);
      end else host_in_valid <= 1'b0;
    end
    src_gap        <= RANDOM_STALLS && ($urandom % 5 == 0);
    // occasional long host stalls (a busy host) on top of short random ones
    if (blackout != 0) blackout <= blackout - 1;
    else if (RANDOM_STALLS && $urandom % 200 == 0) blackout <= 60;
    host_out_ready <= !RANDOM_STALLS || (blackout == 0 && $urandom % 4 != 0);
    if (host_in_valid && !host_in_ready) in_stalls++;
    if (host_out_valid && !host_out_ready) out_stalls++;
    for (int p = 0; p < NUM_PE; p++) if (hbm_aw_valid[p] && hbm_aw_ready[p]) hbm_bursts++;
    if (host_out_valid && host_out_ready) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("unexpected output beat %0d", out_beats);
      end else begin
        for (int k = 0; k < int'(LANES); k++) begin
          logic [31:0] g, e;
          g = host_out_data[32*k +: 32];
          e = exp_q[0][32*k +: 32];
          if (!close(fp2r(g), fp2r(e), 1e-4)) begin
            failures++;
            if (failures < 10) $display("beat %0d lane %0d: %f expected %f", out_beats, k, fp2r(g), fp2r(e));
          end
        end
        void'(exp_q.pop_front());
      end
      out_beats++;
    end
  end

  // ---------------- job data and reference ----------------
  real c1_r;

  task automatic pack(ref logic [31:0] words [$], ref logic [CAPI_W-1:0] q [$]);
    logic [CAPI_W-1:0] b;
    int k;
    b = '0; k = 0;
    foreach (words[i]) begin
      b[32*k +: 32] = words[i]; k++;
      if (k == int'(LANES)) begin q.push_back(b); b = '0; k = 0; end
    end
    if (k != 0) q.push_back(b);
  endtask

  task automatic make_job();
    for (int p = 0; p < int'(NUM_PE); p++)
      for (int wi = 0; wi < int'(NUM_WIN); wi++) begin
        logic [31:0] fld [NF][WIN_WORDS];
        logic [31:0] res [$];
        for (int f = 0; f < int'(NF); f++)
          for (int i = 0; i < int'(WIN_WORDS); i++) begin
            real v;
            if (KERNEL == K_HDIFF) v = urand(0.0, 1.0);
            else if (f == 1) v = urand(2.0, 3.0);           // diagonal b
            else if (f == 3) v = urand(-1.0, 1.0);          // right side d
            else v = urand(-0.5, 0.5);                      // a, c
            fld[f][i] = r2fp(v);
          end
        // input beats: fields interleaved beat by beat
        for (int j = 0; j < int'(WIN_WORDS / LANES); j++)
          for (int f = 0; f < int'(NF); f++) begin
            logic [CAPI_W-1:0] b;
            for (int k = 0; k < int'(LANES); k++) b[32*k +: 32] = fld[f][j*LANES + k];
            in_q.push_back(b);
          end
        // reference results in output order
        if (KERNEL == K_VADVC) begin
          for (int col = 0; col < int'(TX * TY); col++) begin
            real cp [TZ], dp [TZ], x [TZ];
            for (int k = 0; k < int'(TZ); k++) begin
              real a, bb, c, d, den;
              int  i;
              i = col * TZ + k;
              a = fp2r(fld[0][i]); bb = fp2r(fld[1][i]); c = fp2r(fld[2][i]); d = fp2r(fld[3][i]);
              den   = bb - a * ((k == 0) ? 0.0 : cp[k-1]);
              cp[k] = c / den;
              dp[k] = (d - a * ((k == 0) ? 0.0 : dp[k-1])) / den;
            end
            for (int k = TZ - 1; k >= 0; k--) x[k] = dp[k] - cp[k] * ((k == TZ - 1) ? 0.0 : x[k+1]);
            for (int k = 0; k < int'(TZ); k++) res.push_back(r2fp(x[k]));
          end
        end else begin
          for (int z = 0; z < int'(TZ); z++)
            for (int c = 2; c <= int'(TY) - 3; c++)
              for (int r = 2; r <= int'(TX) - 3; r++) begin
                real l0, lcp, lcm, lrp, lrm;
                l0  = lapl(fld[0], z, c, r);
                lcp = lapl(fld[0], z, c + 1, r); lcm = lapl(fld[0], z, c - 1, r);
                lrp = lapl(fld[0], z, c, r + 1); lrm = lapl(fld[0], z, c, r - 1);
                res.push_back(r2fp(sv(fld[0], z, c, r) -
                                   c1_r * (((lcp - l0) - (l0 - lcm)) + ((lrp - l0) - (l0 - lrm)))));
              end
        end
        pack(res, exp_q);
      end
  endtask

  function automatic real sv(ref logic [31:0] f [WIN_WORDS], input int z, input int c, input int r);
    return fp2r(f[(z * TY + c) * TX + r]);
  endfunction
  function automatic real lapl(ref logic [31:0] f [WIN_WORDS], input int z, input int c, input int r);
    return 4.0 * sv(f, z, c, r) - sv(f, z, c, r + 1) - sv(f, z, c, r - 1)
                                - sv(f, z, c + 1, r) - sv(f, z, c - 1, r);
  endfunction

  // ---------------- AXI4-Lite ----------------
  task automatic axil_write(input logic [7:0] a, input logic [31:0] d);
    s_awvalid <= 1; s_awaddr <= a; s_wvalid <= 1; s_wdata <= d;
    @(posedge clk);
    while (!s_awready) @(posedge clk);
    s_awvalid <= 0; s_wvalid <= 0; s_bready <= 1;
    @(posedge clk);
    while (!s_bvalid) @(posedge clk);
    s_bready <= 0;
    @(posedge clk);
  endtask

  task automatic axil_read(input logic [7:0] a, output logic [31:0] d);
    s_arvalid <= 1; s_araddr <= a;
    @(posedge clk);
    while (!s_arready) @(posedge clk);
    s_arvalid <= 0; s_rready <= 1;
    @(posedge clk);
    while (!s_rvalid) @(posedge clk);
    d = s_rdata;
    s_rready <= 0;
    @(posedge clk);
  endtask

  task automatic run_job(input bit bypass);
    logic [31:0] st;
    int expected;
    make_job();
    expected = exp_q.size();
    out_beats = 0;
    axil_write(8'h00, {29'd0, 1'b1, bypass, 1'b1});    // IRQ_EN, BYPASS, START
    while (!irq) @(posedge clk);
    irqs++;
    repeat (2) @(posedge clk);
    axil_read(8'h04, st);
    checks++;
    if (st[1:0] != 2'b10) begin failures++; $display("STATUS %b after irq", st[1:0]); end
    axil_read(8'h18, st);
    job_cycles = int'(st);
    axil_write(8'h04, 32'h2);
    checks++;
    if (out_beats != expected || exp_q.size() != 0 || in_q.size() != 0) begin
      failures++; $display("job: %0d of %0d beats, %0d inputs left", out_beats, expected, in_q.size());
    end
    checks++;
    if (irq) begin failures++; $display("irq still high after clear"); end
    if (bypass) bypass_jobs++; else hbm_jobs++;
  endtask

  initial begin
    checks = 0; failures = 0; finished = 0; hbm_jobs = 0; bypass_jobs = 0; irqs = 0;
    in_stalls = 0; out_stalls = 0; hbm_bursts = 0; job_cycles = 0; out_beats = 0;
    s_awvalid = 0; s_wvalid = 0; s_bready = 0; s_arvalid = 0; s_rready = 0;
    s_awaddr = '0; s_araddr = '0; s_wdata = '0;
    host_in_valid = 0; host_in_data = '0; host_in_last = 0; host_out_ready = 1; src_gap = 0; blackout = 0;
    c1_r = fp2r(r2fp(0.1));
    @(posedge rst_n);
    repeat (2) @(posedge clk);
    axil_write(8'h08, 32'h0000_0000);
    axil_write(8'h0C, 32'h0100_0000);
    axil_write(8'h10, NUM_WIN);
    axil_write(8'h14, r2fp(0.1));
    run_job(1'b0);
    if (RUN_BYPASS) run_job(1'b1);
    finished = 1;
  end

endmodule
