// tb_hdiff_engine: feeds the horizontal-diffusion engine two random 8x8x2
// windows from a register-read memory that behaves like the window buffer and
// compares every output with the Laplacian/flux stencil evaluated here in
// double precision. Checks the number and order of interior results, 'last',
// the release handshake and the cycle count at full rate (TX*TY*TZ+3).
module tb_hdiff_engine;
  import fp32_pkg::*;
  import tb_fp_pkg::*;
  localparam int TX = 8, TY = 8, TZ = 2;
  localparam int WORDS = TX * TY * TZ, NOUT = TZ * (TX - 4) * (TY - 4);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rd_avail, rd_en, rd_release, out_valid, out_ready, out_last, busy;
  logic [6:0] rd_addr;
  fp32_t c1, rd_data, out_data;

  hdiff_engine #(.TX(TX), .TY(TY), .TZ(TZ)) dut (.*);

  fp32_t src [WORDS];
  real   dref [NOUT];
  always @(posedge clk) if (rd_en) rd_data <= src[rd_addr];

  function automatic real s(input int z, input int c, input int r);
    return fp2r(src[(z * TY + c) * TX + r]);
  endfunction
  function automatic real lap(input int z, input int c, input int r);
    return 4.0 * s(z, c, r) - s(z, c, r + 1) - s(z, c, r - 1) - s(z, c + 1, r) - s(z, c - 1, r);
  endfunction

  task automatic make_window();
    int n;
    real k1;
    k1 = fp2r(c1);
    for (int i = 0; i < WORDS; i++) src[i] = r2fp(urand(0.0, 1.0));
    n = 0;
    for (int z = 0; z < TZ; z++)
      for (int c = 2; c <= TY - 3; c++)
        for (int r = 2; r <= TX - 3; r++) begin
          real fc, fcm, fr, frm;
          fc  = lap(z, c + 1, r) - lap(z, c, r);
          fcm = lap(z, c, r) - lap(z, c - 1, r);
          fr  = lap(z, c, r + 1) - lap(z, c, r);
          frm = lap(z, c, r) - lap(z, c, r - 1);
          dref[n++] = s(z, c, r) - k1 * ((fc - fcm) + (fr - frm));
        end
  endtask

  int nout, t_last, releases;
  bit stall;
  always @(posedge clk) if (rst_n) begin
    out_ready <= !stall || ($urandom % 3 != 0);
    if (rd_release) begin releases++; rd_avail <= 0; end
    if (out_valid && out_ready) begin
      checks++;
      if (nout >= NOUT || !close(fp2r(out_data), dref[nout], 1e-5)) begin
        failures++; $display("dest[%0d] = %f, expected %f", nout, fp2r(out_data), dref[nout]);
      end
      checks++;
      if (out_last !== (nout == NOUT - 1)) begin failures++; $display("last wrong at %0d", nout); end
      if (nout == NOUT - 1) t_last = $time / 10;
      nout++;
    end
  end

  initial begin
    int t0;
    rd_avail = 0; out_ready = 1; stall = 0; releases = 0; c1 = r2fp(0.1);
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    make_window(); nout = 0;
    rd_avail <= 1; t0 = $time / 10;
    while (nout != NOUT) @(posedge clk);
    @(posedge clk);
    checks++;
    if (t_last - t0 != WORDS + 3) begin failures++; $display("window took %0d cycles, expected %0d", t_last - t0, WORDS + 3); end
    checks++; if (releases != 1) begin failures++; $display("releases %0d", releases); end
    c1 = r2fp(0.05);
    make_window(); nout = 0; stall = 1;
    rd_avail <= 1;
    while (nout != NOUT) @(posedge clk);
    repeat (5) @(posedge clk);
    checks++; if (releases != 2 || busy) begin failures++; $display("window 2 did not finish"); end
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
