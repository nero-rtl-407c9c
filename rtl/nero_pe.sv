// nero_pe: one NERO processing element with its dedicated HBM port.
//
// Datapath (a chain of valid/ready streams):
//   hbm_port_master (256-bit AXI3) <-> stream_converter (256 <-> 512)
//     <-> bypass_switch <-> field_splitter -> window_buffer per field
//     (banked, ping-pong) -> kernel engine (vadvc_engine or hdiff_engine,
//     chosen by KERNEL) -> degridder (512-bit output stream) -> bypass_switch
//
// A job is 'num_win' windows of TX x TY x TZ points per PE. In HBM mode it runs
// in three phases, as in the paper's execution timeline: LOAD copies the PE's
// input (num_win * IN_BEATS 512-bit beats from host_in, all fields of a window
// interleaved beat by beat) into the PE's HBM region at rd_base; COMPUTE reads
// it back through the pipeline and writes num_win * OUT_BEATS result beats to
// wr_base; UNLOAD reads the results and sends them out on host_out. In bypass
// mode the PE computes straight from host_in to host_out and the HBM port stays
// idle. Inside COMPUTE, loading the next window overlaps computing the current
// one. 'done' pulses when the job's last phase has finished; host_out_last marks
// the PE's final output beat.
//
// The chain of stages, the per-PE HBM port, the HBM bypass and the load /
// compute / unload order follow the paper; the field layout, the window storage
// order and the job format are this design's own choices.
module nero_pe
  import nero_pkg::*;
  import fp32_pkg::*;
#(
  parameter kernel_e     KERNEL = K_VADVC,
  parameter int unsigned TX     = 64,
  parameter int unsigned TY     = 2,
  parameter int unsigned TZ     = 64,
  localparam int unsigned NF        = num_fields(KERNEL),
  localparam int unsigned WIN_WORDS = TX * TY * TZ,
  localparam int unsigned OUT_WORDS = (KERNEL == K_VADVC) ? WIN_WORDS : TZ * (TX - 4) * (TY - 4),
  localparam int unsigned IN_BEATS  = NF * WIN_WORDS / LANES,               // 512-bit beats
  localparam int unsigned OUT_BEATS = (OUT_WORDS + LANES - 1) / LANES,      // 512-bit beats
  localparam int unsigned AW        = $clog2(WIN_WORDS)
) (
  input  logic              clk,
  input  logic              rst_n,
  // job control
  input  logic              start,
  input  logic              bypass,
  input  logic [15:0]       num_win,
  input  logic [HBM_AW-1:0] rd_base,
  input  logic [HBM_AW-1:0] wr_base,
  input  fp32_t             c1,
  output logic              busy,
  output logic              done,
  output phase_e            phase,
  // dedicated HBM port
  output logic              ar_valid,
  input  logic              ar_ready,
  output axi_addr_t         ar,
  input  logic              r_valid,
  output logic              r_ready,
  input  axi_r_t            r,
  output logic              aw_valid,
  input  logic              aw_ready,
  output axi_addr_t         aw,
  output logic              w_valid,
  input  logic              w_ready,
  output axi_w_t            w,
  input  logic              b_valid,
  output logic              b_ready,
  // host streams (load / unload, or bypass)
  input  logic              host_in_valid,
  output logic              host_in_ready,
  input  logic [CAPI_W-1:0] host_in_data,
  output logic              host_out_valid,
  input  logic              host_out_ready,
  output logic [CAPI_W-1:0] host_out_data,
  output logic              host_out_last
);

  localparam int unsigned FW = (NF > 1) ? $clog2(NF) : 1;

  // ---------------- job sequencing ----------------
  typedef enum logic [1:0] {J_IDLE, J_RUN, J_WAIT} jstate_e;
  jstate_e     jstate;
  logic        m_start, m_busy, m_done;
  logic [31:0] m_rd_beats, m_wr_beats, out_left;
  logic [HBM_AW-1:0] m_rd_base, m_wr_base;
  logic [31:0] in_total, out_total;   // 256-bit HBM beats per job
  assign in_total  = 32'(num_win) * 32'(2 * IN_BEATS);
  assign out_total = 32'(num_win) * 32'(2 * OUT_BEATS);

  always_comb begin
    m_rd_base = rd_base; m_wr_base = wr_base;
    m_rd_beats = '0; m_wr_beats = '0;
    unique case (phase)
      PH_LOAD:    begin m_wr_base = rd_base; m_wr_beats = in_total; end
      PH_COMPUTE: begin m_rd_beats = in_total; m_wr_beats = out_total; end
      PH_UNLOAD:  begin m_rd_base = wr_base; m_rd_beats = out_total; end
      default: ;
    endcase
  end

  // ---------------- HBM port ----------------
  logic              hr_valid, hr_ready, hr_last;
  logic [HBM_W-1:0]  hr_data;
  logic              hw_valid, hw_ready, hw_last;
  logic [HBM_W-1:0]  hw_data;

  hbm_port_master #(.MAX_BURST(16), .CNT_W(32)) u_port (
    .clk, .rst_n,
    .start(m_start), .rd_base(m_rd_base), .rd_beats(m_rd_beats),
    .wr_base(m_wr_base), .wr_beats(m_wr_beats),
    .busy(m_busy), .done(m_done),
    .ar_valid, .ar_ready, .ar, .r_valid, .r_ready, .r,
    .aw_valid, .aw_ready, .aw, .w_valid, .w_ready, .w, .b_valid, .b_ready,
    .rd_valid(hr_valid), .rd_ready(hr_ready), .rd_data(hr_data), .rd_last(hr_last),
    .wr_valid(hw_valid), .wr_ready(hw_ready), .wr_data(hw_data)
  );

  // ---------------- width conversion ----------------
  logic              hin_valid, hin_ready, hin_last;
  logic [CAPI_W-1:0] hin_data;
  logic              hout_valid, hout_ready;
  logic [CAPI_W-1:0] hout_data;

  stream_converter #(.NARROW_W(HBM_W)) u_conv (
    .clk, .rst_n,
    .n_in_valid(hr_valid), .n_in_ready(hr_ready), .n_in_data(hr_data), .n_in_last(hr_last),
    .w_out_valid(hin_valid), .w_out_ready(hin_ready), .w_out_data(hin_data), .w_out_last(hin_last),
    .w_in_valid(hout_valid), .w_in_ready(hout_ready), .w_in_data(hout_data), .w_in_last(1'b0),
    .n_out_valid(hw_valid), .n_out_ready(hw_ready), .n_out_data(hw_data), .n_out_last(hw_last)
  );

  // ---------------- switch ----------------
  logic              pin_valid, pin_ready;
  logic [CAPI_W-1:0] pin_data;
  logic              pout_valid, pout_ready, pout_last;
  logic [CAPI_W-1:0] pout_data;

  bypass_switch #(.W(CAPI_W)) u_switch (
    .phase,
    .host_in_valid, .host_in_ready, .host_in_data,
    .hbm_rd_valid(hin_valid), .hbm_rd_ready(hin_ready), .hbm_rd_data(hin_data),
    .pe_out_valid(pout_valid), .pe_out_ready(pout_ready), .pe_out_data(pout_data),
    .pe_in_valid(pin_valid), .pe_in_ready(pin_ready), .pe_in_data(pin_data),
    .hbm_wr_valid(hout_valid), .hbm_wr_ready(hout_ready), .hbm_wr_data(hout_data),
    .host_out_valid, .host_out_ready, .host_out_data
  );

  // ---------------- fields stream splitter ----------------
  logic [NF-1:0]     f_valid, f_ready;
  logic [CAPI_W-1:0] f_data;
  logic [FW-1:0]     f_sel;

  field_splitter #(.NUM_FIELDS(NF), .W(CAPI_W)) u_split (
    .clk, .rst_n,
    .in_valid(pin_valid), .in_ready(pin_ready), .in_data(pin_data), .in_last(1'b0),
    .out_valid(f_valid), .out_ready(f_ready), .out_data(f_data), .cur_field(f_sel)
  );

  // ---------------- window buffers (gridding) ----------------
  logic [NF-1:0] f_avail;
  logic          e_rd_en, e_release;
  logic [AW-1:0] e_rd_addr;
  fp32_t         f_rd [NF];
  logic [1:0]    f_held [NF];

  for (genvar f = 0; f < NF; f++) begin : g_field
    window_buffer #(.WORDS(WIN_WORDS), .LANES(LANES)) u_win (
      .clk, .rst_n,
      .wr_valid(f_valid[f]), .wr_ready(f_ready[f]), .wr_data(f_data),
      .rd_avail(f_avail[f]), .rd_en(e_rd_en), .rd_addr(e_rd_addr), .rd_data(f_rd[f]),
      .rd_release(e_release), .windows_held(f_held[f])
    );
  end

  // ---------------- kernel engine ----------------
  logic  e_valid, e_ready, e_last, e_busy;
  fp32_t e_data;

  if (KERNEL == K_VADVC) begin : g_vadvc
    vadvc_engine #(.TX(TX), .TY(TY), .TZ(TZ)) u_engine (
      .clk, .rst_n, .rd_avail(&f_avail), .rd_en(e_rd_en), .rd_addr(e_rd_addr),
      .rd_a(f_rd[0]), .rd_b(f_rd[1]), .rd_c(f_rd[2]), .rd_d(f_rd[3]),
      .rd_release(e_release),
      .out_valid(e_valid), .out_ready(e_ready), .out_data(e_data), .out_last(e_last),
      .busy(e_busy)
    );
  end else begin : g_hdiff
    hdiff_engine #(.TX(TX), .TY(TY), .TZ(TZ)) u_engine (
      .clk, .rst_n, .c1, .rd_avail(f_avail[0]), .rd_en(e_rd_en), .rd_addr(e_rd_addr),
      .rd_data(f_rd[0]), .rd_release(e_release),
      .out_valid(e_valid), .out_ready(e_ready), .out_data(e_data), .out_last(e_last),
      .busy(e_busy)
    );
  end

  // ---------------- degridding ----------------
  degridder #(.LANES(LANES)) u_degrid (
    .clk, .rst_n,
    .in_valid(e_valid), .in_ready(e_ready), .in_data(e_data), .in_last(e_last),
    .out_valid(pout_valid), .out_ready(pout_ready), .out_data(pout_data), .out_last(pout_last)
  );

  // ---------------- phase control ----------------
  logic host_out_fire;
  assign host_out_fire = host_out_valid && host_out_ready;
  assign host_out_last = (out_left == 32'd1);
  assign busy          = (jstate != J_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      jstate <= J_IDLE; phase <= PH_LOAD; m_start <= 1'b0; done <= 1'b0; out_left <= '0;
    end else begin
      done    <= 1'b0;
      m_start <= 1'b0;
      if (host_out_fire && out_left != '0) out_left <= out_left - 32'd1;
      unique case (jstate)
        J_IDLE: if (start) begin
          out_left <= 32'(num_win) * 32'(OUT_BEATS);
          jstate   <= J_RUN;
          if (bypass) phase <= PH_BYPASS;
          else begin
            phase   <= PH_LOAD;
            m_start <= 1'b1;
          end
        end
        J_RUN: begin
          if (phase == PH_BYPASS) begin
            if (out_left == '0) begin jstate <= J_IDLE; done <= 1'b1; end
          end else if (m_done) begin
            unique case (phase)
              PH_LOAD:    begin phase <= PH_COMPUTE; jstate <= J_WAIT; end
              PH_COMPUTE: begin phase <= PH_UNLOAD;  jstate <= J_WAIT; end
              default:    begin jstate <= J_IDLE; done <= 1'b1; end
            endcase
          end
        end
        J_WAIT: begin            // one cycle for the switch to settle
          m_start <= 1'b1;
          jstate  <= J_RUN;
        end
        default: jstate <= J_IDLE;
      endcase
    end
  end

  // A phase's transfer must finish before the next phase starts.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) m_start |-> !m_busy);

endmodule
