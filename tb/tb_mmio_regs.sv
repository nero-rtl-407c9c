// tb_mmio_regs: AXI4-Lite writes and reads of every control register, the
// one-cycle START pulse (ignored while busy), the cycle counter, the sticky
// DONE bit with write-1-to-clear, and the completion interrupt.
module tb_mmio_regs;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic s_arvalid, s_arready, s_rvalid, s_rready;
  logic [7:0] s_awaddr, s_araddr;
  logic [31:0] s_wdata, s_rdata;
  logic start, bypass, busy, job_done, irq;
  logic [31:0] in_base, out_base, c1;
  logic [15:0] num_win;
  int starts = 0;

  mmio_regs #(.INFO(32'h10e)) dut (.*);

  always @(posedge clk) if (start) starts++;

  task automatic axil_write(input logic [7:0] a, input logic [31:0] d);
    s_awvalid <= 1; s_awaddr <= a; s_wvalid <= 1; s_wdata <= d;
    @(posedge clk);
    while (!s_awready) @(posedge clk);
    s_awvalid <= 0; s_wvalid <= 0;
    s_bready <= 1;
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

  task automatic expect32(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("%s: got %h expected %h", what, got, exp); end
  endtask

  initial begin
    logic [31:0] d;
    s_awvalid = 0; s_wvalid = 0; s_bready = 0; s_arvalid = 0; s_rready = 0;
    s_awaddr = 0; s_araddr = 0; s_wdata = 0; busy = 0; job_done = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    axil_write(8'h08, 32'h0123_4000);
    axil_write(8'h0C, 32'h0456_8000);
    axil_write(8'h10, 32'd3);
    axil_write(8'h14, 32'h3dcc_cccd);
    axil_read(8'h08, d); expect32("IN_BASE", d, 32'h0123_4000);
    axil_read(8'h0C, d); expect32("OUT_BASE", d, 32'h0456_8000);
    axil_read(8'h10, d); expect32("NUM_WIN", d, 32'd3);
    axil_read(8'h14, d); expect32("C1", d, 32'h3dcc_cccd);
    axil_read(8'h1C, d); expect32("INFO", d, 32'h10e);
    expect32("ports", {in_base[15:0], num_win}, {16'h4000, 16'd3});
    // start with bypass and interrupt enabled
    axil_write(8'h00, 32'h7);
    expect32("start pulses", 32'(starts), 32'd1);
    expect32("bypass", 32'(bypass), 32'd1);
    busy = 1;
    axil_write(8'h00, 32'h7);              // ignored while busy
    expect32("start while busy", 32'(starts), 32'd1);
    repeat (20) @(posedge clk);
    axil_read(8'h04, d); expect32("STATUS busy", d, 32'h1);
    busy <= 0; job_done <= 1; @(posedge clk); job_done <= 0; @(posedge clk);
    expect32("irq", 32'(irq), 32'd1);
    axil_read(8'h04, d); expect32("STATUS done", d, 32'h2);
    axil_read(8'h18, d);
    checks++; if (d < 25 || d > 40) begin failures++; $display("CYCLES %0d", d); end
    axil_write(8'h04, 32'h2);
    expect32("irq cleared", 32'(irq), 32'd0);
    axil_read(8'h00, d); expect32("CTRL", d, 32'h6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
