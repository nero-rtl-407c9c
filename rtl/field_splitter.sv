// field_splitter: splits the single 512-bit stream a PE reads from its HBM port
// (or from the host in bypass mode) into one 512-bit stream per field.
//
// The combined stream carries the fields interleaved beat by beat: beat i
// belongs to field (i mod NUM_FIELDS). A counter steers each beat to its field's
// output; the input is stalled while that field's consumer is not ready, so each
// field keeps its own flow control. The counter restarts at field 0 after a beat
// marked 'last'. One stream per field at 512 bits follows the paper; the
// beat-interleaved layout is this design's own choice (the host packs the data).
module field_splitter #(
  parameter int unsigned NUM_FIELDS = 4,
  parameter int unsigned W          = 512,
  localparam int unsigned FW        = (NUM_FIELDS > 1) ? $clog2(NUM_FIELDS) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [W-1:0]          in_data,
  input  logic                  in_last,
  output logic [NUM_FIELDS-1:0] out_valid,
  input  logic [NUM_FIELDS-1:0] out_ready,
  output logic [W-1:0]          out_data,
  output logic [FW-1:0]         cur_field
);

  logic [FW-1:0] sel;

  assign cur_field = sel;
  assign out_data  = in_data;
  assign in_ready  = out_ready[sel];

  always_comb begin
    out_valid      = '0;
    out_valid[sel] = in_valid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sel <= '0;
    else if (in_valid && in_ready) begin
      if (in_last || sel == FW'(NUM_FIELDS - 1)) sel <= '0;
      else sel <= sel + FW'(1);
    end
  end

endmodule
