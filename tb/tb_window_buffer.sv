// tb_window_buffer: writes windows into the double-buffered, 16-bank window
// buffer and reads them back at random addresses. Checks the registered read
// (data one cycle after rd_en), that a second window is accepted while the
// first is being read, that writing stops when both slots are full, and that
// releasing a slot lets the writer continue with the third window.
module tb_window_buffer;
  localparam int WORDS = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_valid, wr_ready, rd_avail, rd_en, rd_release;
  logic [511:0] wr_data;
  logic [7:0] rd_addr;
  logic [31:0] rd_data;
  logic [1:0] windows_held;

  window_buffer #(.WORDS(WORDS)) dut (.*);

  logic [31:0] win [3][WORDS];

  task automatic write_window(input int w);
    for (int j = 0; j < WORDS / 16; j++) begin
      for (int k = 0; k < 16; k++) wr_data[32*k +: 32] <= win[w][16*j + k];
      wr_valid <= 1;
      @(posedge clk);
      while (!wr_ready) @(posedge clk);
    end
    wr_valid <= 0;
  endtask

  task automatic check_window(input int w);
    for (int i = 0; i < 64; i++) begin
      int a;
      a = (i < 32) ? i : $urandom % WORDS;
      rd_en <= 1; rd_addr <= 8'(a);
      @(posedge clk);
      rd_en <= 0;
      @(negedge clk);
      checks++;
      if (rd_data !== win[w][a]) begin
        failures++; $display("window %0d word %0d: %h vs %h", w, a, rd_data, win[w][a]);
      end
      @(posedge clk);
    end
  endtask

  initial begin
    wr_valid = 0; rd_en = 0; rd_release = 0; rd_addr = 0; wr_data = '0;
    for (int w = 0; w < 3; w++) for (int i = 0; i < WORDS; i++) win[w][i] = $urandom;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    checks++; if (rd_avail) begin failures++; $display("avail after reset"); end
    write_window(0);
    @(posedge clk);
    checks++; if (!rd_avail || windows_held != 2'd1) begin failures++; $display("window 0 not available"); end
    write_window(1);           // goes into the second slot while slot 0 is full
    @(posedge clk);
    checks++; if (windows_held != 2'd2 || wr_ready) begin failures++; $display("both slots should be full"); end
    check_window(0);
    // writer blocked: start window 2, it must wait for the release
    fork
      write_window(2);
      begin
        repeat (5) @(posedge clk);
        checks++; if (wr_ready) begin failures++; $display("wr_ready while full"); end
        rd_release <= 1; @(posedge clk); rd_release <= 0;
      end
    join
    @(posedge clk);
    check_window(1);
    rd_release <= 1; @(posedge clk); rd_release <= 0; @(posedge clk);
    check_window(2);
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
