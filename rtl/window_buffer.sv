// window_buffer: on-chip store for one field of a 3D window (the "gridding"
// stage of a PE), partitioned into LANES banks and double buffered.
//
// A window of WORDS float32 values arrives as WORDS/LANES 512-bit beats in the
// order the host packed it. Lane k of beat j is word j*LANES+k and is written to
// bank k at row j, so a whole beat is written in one cycle (cyclic partitioning
// over 16 single-port banks, the reshaping the paper applies to BRAM/URAM). The
// compute engine reads one word per cycle by word address; rd_data is valid the
// cycle after rd_en and holds until the next rd_en (every bank does a registered
// read, as a block RAM, and a registered lane index selects among them).
//
// Two window slots form a ping-pong pair: while the engine reads the full slot,
// the next window is written into the other. rd_avail says the read slot holds a
// complete window; rd_release (one cycle) hands it back to the writer. wr_ready
// drops only when both slots are full. Partitioning follows the paper; the
// double buffering at this level, the bank mapping and the handshake are this
// design's own choices.
module window_buffer #(
  parameter int unsigned WORDS = 8192,
  parameter int unsigned LANES = 16,
  localparam int unsigned W     = 32 * LANES,
  localparam int unsigned ROWS  = WORDS / LANES,
  localparam int unsigned RW    = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned AW    = $clog2(WORDS),
  localparam int unsigned LW    = $clog2(LANES)
) (
  input  logic          clk,
  input  logic          rst_n,
  // write side: 512-bit beats of one field
  input  logic          wr_valid,
  output logic          wr_ready,
  input  logic [W-1:0]  wr_data,
  // read side
  output logic          rd_avail,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [31:0]   rd_data,
  input  logic          rd_release,
  output logic [1:0]    windows_held
);

  logic [1:0]  full;               // slot holds a complete window
  logic        wslot, rslot;
  logic [RW-1:0] wrow;

  assign wr_ready     = !full[wslot];
  assign rd_avail     = full[rslot];
  assign windows_held = 2'(full[0]) + 2'(full[1]);

  logic [LW-1:0] rlane, rlane_q;
  logic [RW-1:0] rrow;
  assign rlane = rd_addr[LW-1:0];
  assign rrow  = RW'(rd_addr >> LW);

  // one RAM per lane (one write and one read port), rows {slot, row}
  logic [31:0] lane_q [LANES];
  for (genvar k = 0; k < LANES; k++) begin : g_bank
    logic [31:0] mem [2 * ROWS];
    always_ff @(posedge clk) begin
      if (wr_valid && wr_ready) mem[{wslot, wrow}] <= wr_data[32*k +: 32];
      if (rd_en) lane_q[k] <= mem[{rslot, rrow}];
    end
  end

  always_ff @(posedge clk) if (rd_en) rlane_q <= rlane;
  assign rd_data = lane_q[rlane_q];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0; wslot <= 1'b0; rslot <= 1'b0; wrow <= '0;
    end else begin
      if (wr_valid && wr_ready) begin
        if (wrow == RW'(ROWS - 1)) begin
          wrow        <= '0;
          full[wslot] <= 1'b1;
          wslot       <= !wslot;
        end else begin
          wrow <= wrow + RW'(1);
        end
      end
      if (rd_release && full[rslot]) begin
        full[rslot] <= 1'b0;
        rslot       <= !rslot;
      end
    end
  end

endmodule
