// mmio_regs: AXI4-Lite slave with the memory-mapped control registers through
// which the host starts a NERO job and learns of its completion.
//
// Register map (32-bit registers, byte addresses):
//   0x00 CTRL     bit0 START (write 1 to start a job; reads 0), bit1 BYPASS
//                 (take input from the host stream instead of HBM), bit2 IRQ_EN
//   0x04 STATUS   bit0 BUSY, bit1 DONE (sticky; write 1 to clear) - read/W1C
//   0x08 IN_BASE  byte offset of the input windows in each PE's HBM region
//   0x0C OUT_BASE byte offset of the results in each PE's HBM region
//   0x10 NUM_WIN  windows each PE processes in the job (bits 15:0)
//   0x14 C1       hdiff diffusion coefficient, float32
//   0x18 CYCLES   clock cycles the last job took (read only)
//   0x1C INFO     bits 7:0 number of PEs, bit 8 kernel (0 vadvc, 1 hdiff)
// 'irq' is high while DONE and IRQ_EN are both set; the host's driver takes
// the interrupt, reads STATUS and clears DONE, so jobs queue behind interrupts.
//
// Writes complete when address and data have both arrived (one B response per
// write); reads return the next cycle. Responses are always OKAY. The AXI-Lite
// control path, the start/completion notification and the interrupt follow the
// paper; the register map is this design's own.
module mmio_regs
  import fp32_pkg::*;
#(
  parameter int unsigned INFO = 0
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [7:0]  s_awaddr,
  input  logic        s_wvalid,
  output logic        s_wready,
  input  logic [31:0] s_wdata,
  output logic        s_bvalid,
  input  logic        s_bready,
  input  logic        s_arvalid,
  output logic        s_arready,
  input  logic [7:0]  s_araddr,
  output logic        s_rvalid,
  input  logic        s_rready,
  output logic [31:0] s_rdata,
  // to the AFU
  output logic        start,
  output logic        bypass,
  output logic [31:0] in_base,
  output logic [31:0] out_base,
  output logic [15:0] num_win,
  output fp32_t       c1,
  input  logic        busy,
  input  logic        job_done,
  output logic        irq
);

  logic        irq_en, done_q;
  logic [31:0] cycles;
  logic        wr_fire;

  assign s_awready = s_awvalid && s_wvalid && !s_bvalid;
  assign s_wready  = s_awready;
  assign wr_fire   = s_awready;
  assign s_arready = !s_rvalid;
  assign irq       = done_q && irq_en;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_bvalid <= 1'b0; s_rvalid <= 1'b0; s_rdata <= '0;
      start <= 1'b0; bypass <= 1'b0; irq_en <= 1'b0; done_q <= 1'b0;
      in_base <= '0; out_base <= '0; num_win <= 16'd1; c1 <= FP_ZERO; cycles <= '0;
    end else begin
      start <= 1'b0;
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (busy) cycles <= cycles + 32'd1;
      if (job_done) done_q <= 1'b1;
      if (wr_fire) begin
        s_bvalid <= 1'b1;
        unique case (s_awaddr[7:2])
          6'h0: begin
            start  <= s_wdata[0] && !busy;
            bypass <= s_wdata[1];
            irq_en <= s_wdata[2];
            if (s_wdata[0] && !busy) cycles <= '0;
          end
          6'h1: if (s_wdata[1]) done_q <= 1'b0;
          6'h2: in_base  <= s_wdata;
          6'h3: out_base <= s_wdata;
          6'h4: num_win  <= s_wdata[15:0];
          6'h5: c1       <= s_wdata;
          default: ;
        endcase
      end
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        unique case (s_araddr[7:2])
          6'h0: s_rdata <= {29'd0, irq_en, bypass, 1'b0};
          6'h1: s_rdata <= {30'd0, done_q, busy};
          6'h2: s_rdata <= in_base;
          6'h3: s_rdata <= out_base;
          6'h4: s_rdata <= {16'd0, num_win};
          6'h5: s_rdata <= c1;
          6'h6: s_rdata <= cycles;
          6'h7: s_rdata <= 32'(INFO);
          default: s_rdata <= 32'hdead_beef;
        endcase
      end
    end
  end

  // AXI handshake rules
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_bvalid && !s_bready |=> s_bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));

endmodule
