// nero_afu: top level of the NERO accelerator functional unit (AFU), the
// near-HBM stencil accelerator that sits behind the CAPI2 power service layer.
//
// NUM_PE processing elements each own one 256-bit HBM pseudo-channel port, so
// the HBM bandwidth the PE array sees grows linearly with the PE count. The host
// side is a 512-bit data stream in each direction (the SNAP/PSL AXI data path)
// plus an AXI4-Lite control port (mmio_regs). Incoming data passes the 64-line
// cache-line buffer and is handed to the PEs one after another: PE p receives
// the next num_win * IN_BEATS beats, then PE p+1. Outgoing results are
// collected in the same order. A job started through CTRL.START runs all PEs;
// each works through its phases (HBM mode: load into HBM, compute, unload; or
// bypass mode: compute straight from the host stream), and when every PE is
// done the AFU sets STATUS.DONE and raises irq if enabled.
//
// HBM addressing: PE p uses the 256 MiB region of its own pseudo-channel,
// byte address p * 2^28 + IN_BASE (input) and p * 2^28 + OUT_BASE (results).
//
// Defaults are the paper's main vadvc configuration: 14 PEs, 64x2x64 windows,
// float32. The hdiff configuration is KERNEL = K_HDIFF, NUM_PE = 16 and
// 16x64x8 windows. Sequential dispatch over one host stream, the region
// layout and the register map are this design's own choices.
module nero_afu
  import nero_pkg::*;
  import fp32_pkg::*;
#(
  parameter kernel_e     KERNEL   = K_VADVC,
  parameter int unsigned NUM_PE   = 14,
  parameter int unsigned TX       = 64,
  parameter int unsigned TY       = 2,
  parameter int unsigned TZ       = 64,
  parameter int unsigned DEPTH_CL = 64,
  localparam int unsigned NF        = num_fields(KERNEL),
  localparam int unsigned WIN_WORDS = TX * TY * TZ,
  localparam int unsigned OUT_WORDS = (KERNEL == K_VADVC) ? WIN_WORDS : TZ * (TX - 4) * (TY - 4),
  localparam int unsigned IN_BEATS  = NF * WIN_WORDS / LANES,
  localparam int unsigned OUT_BEATS = (OUT_WORDS + LANES - 1) / LANES,
  localparam int unsigned PW        = (NUM_PE > 1) ? $clog2(NUM_PE) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite control (MMIO)
  input  logic              s_awvalid,
  output logic              s_awready,
  input  logic [7:0]        s_awaddr,
  input  logic              s_wvalid,
  output logic              s_wready,
  input  logic [31:0]       s_wdata,
  output logic              s_bvalid,
  input  logic              s_bready,
  input  logic              s_arvalid,
  output logic              s_arready,
  input  logic [7:0]        s_araddr,
  output logic              s_rvalid,
  input  logic              s_rready,
  output logic [31:0]       s_rdata,
  output logic              irq,
  // host data streams (CAPI2 / PSL side, 512-bit)
  input  logic              host_in_valid,
  output logic              host_in_ready,
  input  logic [CAPI_W-1:0] host_in_data,
  input  logic              host_in_last,
  output logic              host_out_valid,
  input  logic              host_out_ready,
  output logic [CAPI_W-1:0] host_out_data,
  output logic              host_out_last,
  // one HBM pseudo-channel port per PE (AXI3, 256-bit)
  output logic              hbm_ar_valid [NUM_PE],
  input  logic              hbm_ar_ready [NUM_PE],
  output axi_addr_t         hbm_ar       [NUM_PE],
  input  logic              hbm_r_valid  [NUM_PE],
  output logic              hbm_r_ready  [NUM_PE],
  input  axi_r_t            hbm_r        [NUM_PE],
  output logic              hbm_aw_valid [NUM_PE],
  input  logic              hbm_aw_ready [NUM_PE],
  output axi_addr_t         hbm_aw       [NUM_PE],
  output logic              hbm_w_valid  [NUM_PE],
  input  logic              hbm_w_ready  [NUM_PE],
  output axi_w_t            hbm_w        [NUM_PE],
  input  logic              hbm_b_valid  [NUM_PE],
  output logic              hbm_b_ready  [NUM_PE]
);

  // ---------------- control registers ----------------
  logic        start, bypass, busy, job_done;
  logic [31:0] in_base, out_base;
  logic [15:0] num_win;
  fp32_t       c1;

  mmio_regs #(.INFO((int'(KERNEL) << 8) | NUM_PE)) u_mmio (
    .clk, .rst_n,
    .s_awvalid, .s_awready, .s_awaddr, .s_wvalid, .s_wready, .s_wdata,
    .s_bvalid, .s_bready, .s_arvalid, .s_arready, .s_araddr,
    .s_rvalid, .s_rready, .s_rdata,
    .start, .bypass, .in_base, .out_base, .num_win, .c1,
    .busy, .job_done, .irq
  );

  // ---------------- cache-line buffer ----------------
  logic              cb_valid, cb_ready, cb_last;
  logic [CAPI_W-1:0] cb_data;
  logic [$clog2(DEPTH_CL):0] cb_level;

  cacheline_buffer #(.DEPTH_CL(DEPTH_CL), .BEAT_W(CAPI_W)) u_clbuf (
    .clk, .rst_n,
    .in_valid(host_in_valid), .in_ready(host_in_ready), .in_data(host_in_data), .in_last(host_in_last),
    .out_valid(cb_valid), .out_ready(cb_ready), .out_data(cb_data), .out_last(cb_last),
    .level(cb_level)
  );

  // ---------------- PE array ----------------
  logic              pe_in_valid  [NUM_PE];
  logic              pe_in_ready  [NUM_PE];
  logic              pe_out_valid [NUM_PE];
  logic              pe_out_ready [NUM_PE];
  logic [CAPI_W-1:0] pe_out_data  [NUM_PE];
  logic              pe_out_last  [NUM_PE];
  logic [NUM_PE-1:0] pe_busy, pe_done, pe_finished;
  phase_e            pe_phase [NUM_PE];

  logic [PW-1:0] isel, osel;          // PE fed by / draining to the host stream
  logic [31:0]   ileft;               // beats left for PE isel
  logic          job;

  for (genvar p = 0; p < NUM_PE; p++) begin : g_pe
    logic [HBM_AW-1:0] rd_base, wr_base;
    assign rd_base = (HBM_AW'(p) << 28) | HBM_AW'(in_base[27:0]);
    assign wr_base = (HBM_AW'(p) << 28) | HBM_AW'(out_base[27:0]);

    assign pe_in_valid[p]  = job && cb_valid && (isel == PW'(p)) && (ileft != '0);
    assign pe_out_ready[p] = host_out_ready && (osel == PW'(p));

    nero_pe #(.KERNEL(KERNEL), .TX(TX), .TY(TY), .TZ(TZ)) u_pe (
      .clk, .rst_n,
      .start, .bypass, .num_win, .rd_base, .wr_base, .c1,
      .busy(pe_busy[p]), .done(pe_done[p]), .phase(pe_phase[p]),
      .ar_valid(hbm_ar_valid[p]), .ar_ready(hbm_ar_ready[p]), .ar(hbm_ar[p]),
      .r_valid(hbm_r_valid[p]), .r_ready(hbm_r_ready[p]), .r(hbm_r[p]),
      .aw_valid(hbm_aw_valid[p]), .aw_ready(hbm_aw_ready[p]), .aw(hbm_aw[p]),
      .w_valid(hbm_w_valid[p]), .w_ready(hbm_w_ready[p]), .w(hbm_w[p]),
      .b_valid(hbm_b_valid[p]), .b_ready(hbm_b_ready[p]),
      .host_in_valid(pe_in_valid[p]), .host_in_ready(pe_in_ready[p]), .host_in_data(cb_data),
      .host_out_valid(pe_out_valid[p]), .host_out_ready(pe_out_ready[p]),
      .host_out_data(pe_out_data[p]), .host_out_last(pe_out_last[p])
    );
  end

  // dispatch and collect in PE order
  assign cb_ready       = job && (ileft != '0) && pe_in_ready[isel];
  assign host_out_valid = pe_out_valid[osel];
  assign host_out_data  = pe_out_data[osel];
  assign host_out_last  = pe_out_last[osel] && (osel == PW'(NUM_PE - 1));
  assign busy           = job;

  logic [31:0] per_pe_in;
  assign per_pe_in = 32'(num_win) * 32'(IN_BEATS);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      job <= 1'b0; isel <= '0; osel <= '0; ileft <= '0; pe_finished <= '0; job_done <= 1'b0;
    end else begin
      job_done <= 1'b0;
      if (start && !job) begin
        job <= 1'b1; isel <= '0; osel <= '0; ileft <= per_pe_in; pe_finished <= '0;
      end else if (job) begin
        if (cb_valid && cb_ready) begin
          if (ileft == 32'd1 && isel != PW'(NUM_PE - 1)) begin
            isel  <= isel + PW'(1);
            ileft <= per_pe_in;
          end else begin
            ileft <= ileft - 32'd1;
          end
        end
        if (host_out_valid && host_out_ready && pe_out_last[osel] && osel != PW'(NUM_PE - 1))
          osel <= osel + PW'(1);
        pe_finished <= pe_finished | pe_done;
        if (&(pe_finished | pe_done)) begin
          job      <= 1'b0;
          job_done <= 1'b1;
        end
      end
    end
  end

endmodule
