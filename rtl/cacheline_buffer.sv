// cacheline_buffer: the FPGA-side cache-line buffer between the CAPI2/PSL AXI
// data path and the accelerator functional unit.
//
// A POWER9 cache line is 1024 bits (128 B, 32 floats) and arrives as two
// 512-bit AXI beats. The buffer assembles the two beats of a line in a staging
// register and commits the whole line into a FIFO of DEPTH_CL lines (64 in the
// paper, enough to keep CAPI2 at its peak rate). On the AFU side the lines leave
// again as 512-bit beats, low half first. A 'last' flag on the first beat of a
// line commits a half line (upper half unused) so a transfer may have an odd
// number of beats.
//
// Interface: valid/ready streams on both sides; data is accepted on the cycle
// where valid and ready are both high. Latency from the second beat of a line to
// its first output beat is one cycle. The 64-line depth and the 1024/512-bit
// widths follow the paper; the beat order, the half-line rule and the handshake
// are this design's own choices.
module cacheline_buffer #(
  parameter int unsigned DEPTH_CL = 64,
  parameter int unsigned BEAT_W   = 512,
  localparam int unsigned CL_W    = 2 * BEAT_W,
  localparam int unsigned AW      = $clog2(DEPTH_CL)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [BEAT_W-1:0] in_data,
  input  logic              in_last,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [BEAT_W-1:0] out_data,
  output logic              out_last,
  output logic [AW:0]       level       // cache lines held
);

  typedef struct packed {
    logic [CL_W-1:0] data;
    logic            half;   // only the low half is valid
    logic            last;
  } line_t;

  line_t           mem [DEPTH_CL];
  logic [AW-1:0]   wptr, rptr;
  logic [AW:0]     count;
  logic            stage_full;          // low half captured
  logic [BEAT_W-1:0] stage;
  logic            rd_half;             // next output beat is the upper half

  logic commit, pop_line, out_fire, in_fire;
  line_t head;

  assign head     = mem[rptr];
  assign in_ready = (count != (AW+1)'(DEPTH_CL));
  assign in_fire  = in_valid && in_ready;
  assign commit   = in_fire && (stage_full || in_last);
  assign out_valid = (count != '0);
  assign out_data  = rd_half ? head.data[CL_W-1:BEAT_W] : head.data[BEAT_W-1:0];
  assign out_last  = head.last && (head.half || rd_half);
  assign out_fire  = out_valid && out_ready;
  assign pop_line  = out_fire && (head.half || rd_half);
  assign level     = count;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0; rptr <= '0; count <= '0;
      stage_full <= 1'b0; stage <= '0; rd_half <= 1'b0;
    end else begin
      if (in_fire) begin
        if (commit) begin
          mem[wptr] <= stage_full ? '{data: {in_data, stage}, half: 1'b0, last: in_last}
                                  : '{data: {{BEAT_W{1'b0}}, in_data}, half: 1'b1, last: 1'b1};
          wptr       <= wptr + AW'(1);
          stage_full <= 1'b0;
        end else begin
          stage      <= in_data;
          stage_full <= 1'b1;
        end
      end
      if (out_fire) rd_half <= pop_line ? 1'b0 : 1'b1;
      if (pop_line) rptr <= rptr + AW'(1);
      count <= count + (AW+1)'(commit) - (AW+1)'(pop_line);
    end
  end

endmodule
