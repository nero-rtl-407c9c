// stream_converter: width conversion between a 256-bit HBM pseudo-channel port
// and the 512-bit streams of a processing element.
//
// Up path (read side): two narrow beats are gathered into one wide beat, the
// first narrow beat in the low half. A 'last' on the first narrow beat of a pair
// emits a wide beat with a zero upper half. Down path (write side): each wide
// beat leaves as two narrow beats, low half first; 'last' goes on the second.
// Both paths are independent valid/ready streams with one register stage, so
// each sustains the full narrow-side rate. The widths follow the paper; beat
// order and the odd-length rule are this design's own choices.
module stream_converter #(
  parameter int unsigned NARROW_W = 256,
  localparam int unsigned WIDE_W  = 2 * NARROW_W
) (
  input  logic                clk,
  input  logic                rst_n,
  // up path: narrow in, wide out
  input  logic                n_in_valid,
  output logic                n_in_ready,
  input  logic [NARROW_W-1:0] n_in_data,
  input  logic                n_in_last,
  output logic                w_out_valid,
  input  logic                w_out_ready,
  output logic [WIDE_W-1:0]   w_out_data,
  output logic                w_out_last,
  // down path: wide in, narrow out
  input  logic                w_in_valid,
  output logic                w_in_ready,
  input  logic [WIDE_W-1:0]   w_in_data,
  input  logic                w_in_last,
  output logic                n_out_valid,
  input  logic                n_out_ready,
  output logic [NARROW_W-1:0] n_out_data,
  output logic                n_out_last
);

  // ---------------- up path ----------------
  logic                lo_full;
  logic [NARROW_W-1:0] lo;
  logic                up_fire;
  // accept a narrow beat while the wide output register is free or draining
  assign n_in_ready = !w_out_valid || w_out_ready;
  assign up_fire    = n_in_valid && n_in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lo_full <= 1'b0; lo <= '0;
      w_out_valid <= 1'b0; w_out_data <= '0; w_out_last <= 1'b0;
    end else begin
      if (w_out_valid && w_out_ready) w_out_valid <= 1'b0;
      if (up_fire) begin
        if (lo_full) begin
          w_out_data  <= {n_in_data, lo};
          w_out_last  <= n_in_last;
          w_out_valid <= 1'b1;
          lo_full     <= 1'b0;
        end else if (n_in_last) begin
          w_out_data  <= {{NARROW_W{1'b0}}, n_in_data};
          w_out_last  <= 1'b1;
          w_out_valid <= 1'b1;
        end else begin
          lo      <= n_in_data;
          lo_full <= 1'b1;
        end
      end
    end
  end

  // ---------------- down path ----------------
  logic              hold_valid, hi_phase, hold_last;
  logic [WIDE_W-1:0] hold;
  assign w_in_ready  = !hold_valid || (n_out_ready && hi_phase);
  assign n_out_valid = hold_valid;
  assign n_out_data  = hi_phase ? hold[WIDE_W-1:NARROW_W] : hold[NARROW_W-1:0];
  assign n_out_last  = hi_phase && hold_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold_valid <= 1'b0; hi_phase <= 1'b0; hold_last <= 1'b0; hold <= '0;
    end else begin
      if (hold_valid && n_out_ready) begin
        hi_phase <= !hi_phase;
        if (hi_phase) hold_valid <= 1'b0;
      end
      if (w_in_valid && w_in_ready) begin
        hold       <= w_in_data;
        hold_last  <= w_in_last;
        hold_valid <= 1'b1;
        hi_phase   <= 1'b0;
      end
    end
  end

endmodule
