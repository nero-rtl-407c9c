// degridder: packs the 32-bit results of a PE's engine into the single 512-bit
// output stream ("degridding" of the output window).
//
// Word k of each group of 16 goes to lane k (bits 32k+31:32k) of a beat. A beat
// leaves when its 16th word arrives or when a word flagged 'last' (end of a
// window) arrives; a short final beat is zero padded and carries 'last'. The
// output beat sits in one register; input is accepted whenever that register
// is empty or draining, so full rate is one word per cycle. The 512-bit single
// output stream follows the paper; lane order and padding are this design's own
// choices.
module degridder #(
  parameter int unsigned LANES = 16,
  localparam int unsigned W    = 32 * LANES,
  localparam int unsigned LW   = $clog2(LANES)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [31:0]  in_data,
  input  logic         in_last,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data,
  output logic         out_last
);

  logic [W-1:0]  acc;
  logic [LW-1:0] lane;
  logic          fire, emit;
  logic [W-1:0]  nxt;

  always_comb begin
    nxt = acc;
    nxt[32*lane +: 32] = in_data;
  end

  assign in_ready = !out_valid || out_ready;
  assign fire     = in_valid && in_ready;
  assign emit     = fire && (in_last || lane == LW'(LANES - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0; lane <= '0; out_valid <= 1'b0; out_data <= '0; out_last <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (fire) begin
        if (emit) begin
          out_data  <= nxt;
          out_last  <= in_last;
          out_valid <= 1'b1;
          acc       <= '0;
          lane      <= '0;
        end else begin
          acc  <= nxt;
          lane <= lane + LW'(1);
        end
      end
    end
  end

endmodule
