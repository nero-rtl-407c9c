// tb_vadvc_engine: feeds the vertical-advection engine two windows of random,
// diagonally dominant tridiagonal systems (4 x 2 columns of depth 16) from
// register-read memories that behave like the window buffers, and compares each
// result with a Thomas-algorithm solution computed here in double precision.
// Also checks the window-release handshake, 'last', and the cycle count of a
// window at full output rate: TX*TY*(3*TZ+1)+1.
module tb_vadvc_engine;
  import fp32_pkg::*;
  import tb_fp_pkg::*;
  localparam int TX = 4, TY = 2, TZ = 16;
  localparam int COLS = TX * TY, WORDS = COLS * TZ;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rd_avail, rd_en, rd_release, out_valid, out_ready, out_last, busy;
  logic [6:0] rd_addr;
  fp32_t rd_a, rd_b, rd_c, rd_d, out_data;

  vadvc_engine #(.TX(TX), .TY(TY), .TZ(TZ)) dut (.*);

  fp32_t ma [WORDS], mb [WORDS], mc [WORDS], md [WORDS];
  real   xref [WORDS];
  always @(posedge clk) if (rd_en) begin
    rd_a <= ma[rd_addr]; rd_b <= mb[rd_addr]; rd_c <= mc[rd_addr]; rd_d <= md[rd_addr];
  end

  task automatic make_window();
    for (int col = 0; col < COLS; col++) begin
      real a [TZ], b [TZ], c [TZ], d [TZ], cp [TZ], dp [TZ];
      for (int k = 0; k < TZ; k++) begin
        int i;
        i = col * TZ + k;
        ma[i] = r2fp(urand(-0.5, 0.5)); mb[i] = r2fp(urand(2.0, 3.0));
        mc[i] = r2fp(urand(-0.5, 0.5)); md[i] = r2fp(urand(-1.0, 1.0));
        a[k] = fp2r(ma[i]); b[k] = fp2r(mb[i]); c[k] = fp2r(mc[i]); d[k] = fp2r(md[i]);
      end
      for (int k = 0; k < TZ; k++) begin
        real den;
        den   = b[k] - a[k] * ((k == 0) ? 0.0 : cp[k-1]);
        cp[k] = c[k] / den;
        dp[k] = (d[k] - a[k] * ((k == 0) ? 0.0 : dp[k-1])) / den;
      end
      for (int k = TZ - 1; k >= 0; k--)
        xref[col * TZ + k] = dp[k] - cp[k] * ((k == TZ - 1) ? 0.0 : xref[col * TZ + k + 1]);
    end
  endtask

  int nout, t_first, t_last, releases;
  bit stall;
  always @(posedge clk) if (rst_n) begin
    out_ready <= !stall || ($urandom % 3 != 0);
    if (rd_release) begin releases++; rd_avail <= 0; end
    if (out_valid && out_ready) begin
      checks++;
      if (!close(fp2r(out_data), xref[nout], 1e-5)) begin
        failures++; $display("x[%0d] = %f, expected %f", nout, fp2r(out_data), xref[nout]);
      end
      checks++;
      if (out_last !== (nout == WORDS - 1)) begin failures++; $display("last wrong at %0d", nout); end
      if (nout == 0) t_first = $time / 10;
      if (nout == WORDS - 1) t_last = $time / 10;
      nout++;
    end
  end

  initial begin
    int t0;
    rd_avail = 0; out_ready = 1; stall = 0; releases = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    // window 1 at full rate, timed
    make_window(); nout = 0;
    rd_avail <= 1; t0 = $time / 10;
    while (releases == 0) @(posedge clk);
    @(posedge clk);
    checks++;
    if (nout != WORDS) begin failures++; $display("outputs %0d", nout); end
    checks++;
    if (t_last - t0 != COLS * (3 * TZ + 1) + 1) begin
      failures++; $display("window took %0d cycles, expected %0d", t_last - t0, COLS * (3 * TZ + 1) + 1);
    end
    // window 2 with output back-pressure
    make_window(); nout = 0; stall = 1;
    rd_avail <= 1;
    while (releases == 1) @(posedge clk);
    @(posedge clk);
    checks++;
    if (nout != WORDS || busy) begin failures++; $display("window 2: %0d outputs", nout); end
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
