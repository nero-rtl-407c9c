// vadvc_engine: the vertical-advection compute pipeline of a PE.
//
// For every (x,y) column of a TX x TY x TZ window the engine solves a
// tridiagonal system along z with the Thomas algorithm, in the two sweeps the
// paper describes:
//   forward sweep  (k = 0 .. TZ-1):  den   = b[k] - a[k]*c'[k-1]
//                                    c'[k] = c[k] / den
//                                    d'[k] = (d[k] - a[k]*d'[k-1]) / den
//   backward sweep (k = TZ-1 .. 0):  x[k]  = d'[k] - c'[k]*x[k+1]  (x[TZ] = 0)
// c' and d' go into two intermediate stores (the two FIFOs of the paper's PE
// drawing), read back last-in-first-out by the backward sweep; x goes into an
// output buffer that is then streamed out in ascending z, one word per cycle.
//
// Inputs are four coefficient fields a (sub-diagonal), b (diagonal),
// c (super-diagonal) and d (right-hand side) held in window buffers; word
// (y*TX + x)*TZ + z of each buffer is point (x,y,z). One address drives all four
// buffers; read data returns one cycle later. Per column the engine takes
// TZ+1 cycles forward, TZ backward and TZ out (more if the output stalls), so a
// window takes TX*TY*(3*TZ+1)+1 cycles at full output rate. After the last
// column it releases the window buffers and starts on the next window.
//
// The two sweeps, the intermediate buffer and the output buffer follow the
// paper. How COSMO forms a, b, c, d from wcon, ustage, upos, utens and
// utensstage is not given there, so the coefficients are inputs; the one-point-
// per-cycle sequencing and the LIFO read of the intermediate store are this
// design's own choices. Arithmetic is float32 (fp32_pkg).
module vadvc_engine
  import fp32_pkg::*;
#(
  parameter int unsigned TX = 64,
  parameter int unsigned TY = 2,
  parameter int unsigned TZ = 64,
  localparam int unsigned WORDS = TX * TY * TZ,
  localparam int unsigned COLS  = TX * TY,
  localparam int unsigned AW    = $clog2(WORDS),
  localparam int unsigned ZW    = $clog2(TZ),
  localparam int unsigned CW    = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          rd_avail,      // all four coefficient windows present
  output logic          rd_en,
  output logic [AW-1:0] rd_addr,
  input  fp32_t         rd_a,
  input  fp32_t         rd_b,
  input  fp32_t         rd_c,
  input  fp32_t         rd_d,
  output logic          rd_release,
  output logic          out_valid,
  input  logic          out_ready,
  output fp32_t         out_data,
  output logic          out_last,      // final word of a window
  output logic          busy
);

  typedef enum logic [1:0] {S_IDLE, S_FWD, S_BWD, S_OUT} state_e;
  state_e state;

  fp32_t cp_mem [TZ];   // intermediate store for c'
  fp32_t dp_mem [TZ];   // intermediate store for d'
  fp32_t x_mem  [TZ];   // output buffer

  logic [CW-1:0] col;
  logic [ZW-1:0] kiss;          // next z to issue in the forward sweep
  logic          issuing;
  logic          dv;            // read data valid this cycle
  logic [ZW-1:0] kdv;           // z of the returning data
  logic [ZW-1:0] kb;            // backward / output z
  fp32_t         cp_prev, dp_prev, x_next;

  // forward-sweep datapath on the returning words
  fp32_t den, cp_new, dp_new;
  always_comb begin
    den    = fp_sub(rd_b, fp_mul(rd_a, cp_prev));
    cp_new = fp_div(rd_c, den);
    dp_new = fp_div(fp_sub(rd_d, fp_mul(rd_a, dp_prev)), den);
  end

  // backward-sweep datapath
  fp32_t x_new;
  assign x_new = fp_sub(dp_mem[kb], fp_mul(cp_mem[kb], x_next));

  assign rd_en   = (state == S_FWD) && issuing;
  assign rd_addr = AW'(col) * AW'(TZ) + AW'(kiss);
  assign busy    = (state != S_IDLE);

  assign out_valid = (state == S_OUT);
  assign out_data  = x_mem[kb];
  assign out_last  = (col == CW'(COLS - 1)) && (kb == ZW'(TZ - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; col <= '0; kiss <= '0; issuing <= 1'b0; dv <= 1'b0;
      kdv <= '0; kb <= '0; cp_prev <= FP_ZERO; dp_prev <= FP_ZERO;
      x_next <= FP_ZERO; rd_release <= 1'b0;
    end else begin
      rd_release <= 1'b0;
      dv  <= rd_en;
      kdv <= kiss;
      unique case (state)
        S_IDLE: if (rd_avail && !rd_release) begin
          state <= S_FWD; col <= '0; kiss <= '0; issuing <= 1'b1;
          cp_prev <= FP_ZERO; dp_prev <= FP_ZERO;
        end
        S_FWD: begin
          if (issuing) begin
            if (kiss == ZW'(TZ - 1)) issuing <= 1'b0;
            else kiss <= kiss + ZW'(1);
          end
          if (dv) begin
            cp_mem[kdv] <= cp_new;
            dp_mem[kdv] <= dp_new;
            cp_prev     <= cp_new;
            dp_prev     <= dp_new;
            if (kdv == ZW'(TZ - 1)) begin
              state  <= S_BWD;
              kb     <= ZW'(TZ - 1);
              x_next <= FP_ZERO;
            end
          end
        end
        S_BWD: begin
          x_mem[kb] <= x_new;
          x_next    <= x_new;
          if (kb == '0) state <= S_OUT;
          else kb <= kb - ZW'(1);
        end
        S_OUT: if (out_ready) begin
          if (kb == ZW'(TZ - 1)) begin
            cp_prev <= FP_ZERO; dp_prev <= FP_ZERO;
            if (col == CW'(COLS - 1)) begin
              state      <= S_IDLE;
              rd_release <= 1'b1;
            end else begin
              col     <= col + CW'(1);
              kiss    <= '0;
              issuing <= 1'b1;
              state   <= S_FWD;
            end
          end else begin
            kb <= kb + ZW'(1);
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
