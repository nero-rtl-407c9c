// hdiff_engine: the horizontal-diffusion compute pipeline of a PE.
//
// For every interior point (r,c) of each z plane of a TX x TY x TZ window it
// evaluates the compound stencil of the COSMO horizontal diffusion:
//   lap(p)   = 4*src(p) - src(r+1,c) - src(r-1,c) - src(r,c+1) - src(r,c-1)
//   flux_C   = lap(r,c+1) - lap(r,c)      flux_Cm = lap(r,c) - lap(r,c-1)
//   flux_R   = lap(r+1,c) - lap(r,c)      flux_Rm = lap(r,c) - lap(r-1,c)
//   dest     = src(r,c) - c1 * ((flux_C - flux_Cm) + (flux_R - flux_Rm))
// Interior means 2 <= r <= TX-3 and 2 <= c <= TY-3, so each plane yields
// (TX-4)*(TY-4) results; halos are covered by overlapping windows on the host.
//
// The source window is read from its window buffer in storage order (r fastest,
// then c, then z; word (z*TY + c)*TX + r), one word per cycle. A shift register
// of 4*TX+5 words acts as the line buffer (four rows plus five words) and
// exposes the 13 points the stencil needs; the whole stencil is evaluated in the
// cycle a word arrives and pushed into a two-entry output queue. Reads stall only
// when that queue would overflow, so the engine takes TX*TY*TZ+3 cycles from
// rd_avail to the last result of a window at full output rate. The last result
// of a window is flagged and the window buffer released.
//
// The Laplacian/flux structure and the single coefficient c1 follow the paper's
// pseudo-code. Two of its printed lines are taken as typos: flux_Rm is printed
// as lap_CR - lap_CmR (which would leave lap_CRm unused) and is computed here as
// the row flux lap(r,c) - lap(r-1,c); c1 is applied to the sum of both flux
// differences. Line buffering, the Laplacian definition and the interior range
// are this design's own choices. Arithmetic is float32 (fp32_pkg).
module hdiff_engine
  import fp32_pkg::*;
#(
  parameter int unsigned TX = 16,
  parameter int unsigned TY = 64,
  parameter int unsigned TZ = 8,
  localparam int unsigned WORDS = TX * TY * TZ,
  localparam int unsigned PLANE = TX * TY,
  localparam int unsigned AW    = $clog2(WORDS),
  localparam int unsigned SR    = 4 * TX + 5,
  localparam int unsigned OFF   = 2 * TX + 2
) (
  input  logic          clk,
  input  logic          rst_n,
  input  fp32_t         c1,
  input  logic          rd_avail,
  output logic          rd_en,
  output logic [AW-1:0] rd_addr,
  input  fp32_t         rd_data,
  output logic          rd_release,
  output logic          out_valid,
  input  logic          out_ready,
  output fp32_t         out_data,
  output logic          out_last,
  output logic          busy
);

  fp32_t sr [SR];                 // line buffer, sr[0] = newest word
  fp32_t win [SR];                // line buffer including the arriving word

  logic          active;
  logic [AW-1:0] iss;             // next address to read
  logic          dv;              // a word arrives this cycle
  logic [AW-1:0] dv_idx;          // its index in the window

  // two-entry output queue
  fp32_t q_data [2];
  logic  q_last [2];
  logic [1:0] q_cnt;
  logic  q_rd;

  logic pop, push, issue;

  always_comb begin
    win[0] = rd_data;
    for (int i = 1; i < SR; i++) win[i] = sr[i-1];
  end

  // position of the stencil centre within its plane
  int   lin, cr, cc;
  logic interior;
  always_comb begin
    lin = (int'(dv_idx) % int'(PLANE)) - int'(OFF);
    cr  = (lin >= 0) ? lin % int'(TX) : 0;
    cc  = (lin >= 0) ? lin / int'(TX) : 0;
    interior = (lin >= 0) && (cr >= 2) && (cr <= int'(TX) - 3) &&
               (cc >= 2) && (cc <= int'(TY) - 3);
  end

  // tap(dr, dc): word at row offset dr, column offset dc from the centre
  function automatic fp32_t tap(input int dr, input int dc);
    return win[int'(OFF) - (dc * int'(TX) + dr)];
  endfunction

  function automatic fp32_t lap(input int dr, input int dc);
    fp32_t s;
    s = fp_add(fp_add(tap(dr + 1, dc), tap(dr - 1, dc)),
               fp_add(tap(dr, dc + 1), tap(dr, dc - 1)));
    return fp_sub(fp_mul4(tap(dr, dc)), s);
  endfunction

  fp32_t lap_cr, lap_crp, lap_crm, lap_cpr, lap_cmr;
  fp32_t flux_c, flux_cm, flux_r, flux_rm, dest;
  always_comb begin
    lap_cr  = lap(0, 0);
    lap_crp = lap(1, 0);
    lap_crm = lap(-1, 0);
    lap_cpr = lap(0, 1);
    lap_cmr = lap(0, -1);
    flux_c  = fp_sub(lap_cpr, lap_cr);
    flux_cm = fp_sub(lap_cr, lap_cmr);
    flux_r  = fp_sub(lap_crp, lap_cr);
    flux_rm = fp_sub(lap_cr, lap_crm);
    dest    = fp_sub(tap(0, 0),
                     fp_mul(c1, fp_add(fp_sub(flux_c, flux_cm), fp_sub(flux_r, flux_rm))));
  end

  assign out_valid = (q_cnt != 2'd0);
  assign out_data  = q_data[q_rd];
  assign out_last  = q_last[q_rd];
  assign pop       = out_valid && out_ready;
  assign push      = dv && interior;
  // an issued word may push one result next cycle; keep room for it
  assign issue     = active && (({1'b0, q_cnt} - {2'b0, pop} + {2'b0, dv}) < 3'd2);
  assign rd_en     = issue;
  assign rd_addr   = iss;
  assign busy      = active || dv || out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; iss <= '0; dv <= 1'b0; dv_idx <= '0;
      q_cnt <= '0; q_rd <= 1'b0; rd_release <= 1'b0;
      for (int i = 0; i < SR; i++) sr[i] <= FP_ZERO;
      for (int i = 0; i < 2; i++) begin q_data[i] <= FP_ZERO; q_last[i] <= 1'b0; end
    end else begin
      rd_release <= 1'b0;
      dv     <= issue;
      dv_idx <= iss;
      if (!active && !dv && rd_avail && !rd_release) begin
        active <= 1'b1;
        iss    <= '0;
      end else if (issue) begin
        if (iss == AW'(WORDS - 1)) begin
          active     <= 1'b0;
          rd_release <= 1'b1;
        end
        iss <= iss + AW'(1);
      end
      if (dv) for (int i = 0; i < SR; i++) sr[i] <= win[i];
      if (push) begin
        q_data[q_rd ^ q_cnt[0]] <= dest;
        q_last[q_rd ^ q_cnt[0]] <= (dv_idx == AW'(WORDS - 1));
      end
      if (pop) q_rd <= !q_rd;
      q_cnt <= q_cnt + 2'(push) - 2'(pop);
    end
  end

endmodule
