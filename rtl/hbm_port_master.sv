// hbm_port_master: AXI3 master on the one 256-bit HBM pseudo-channel port that
// belongs to a PE.
//
// On 'start' it reads rd_beats beats from rd_base and writes wr_beats beats to
// wr_base, both as incrementing bursts of up to MAX_BURST beats (16 is the AXI3
// limit). Read addresses are issued back to back as soon as the port accepts
// them; read data leaves on rd_* with r_ready driven by the consumer, and 'last'
// marks the final beat of the whole read. Write addresses are likewise issued
// ahead; write data is taken from wr_* and framed into bursts with wlast on
// every burst's final beat; write responses are counted. 'done' pulses once all
// read data and all write responses have arrived. Bases are byte addresses and
// must be aligned to a burst (MAX_BURST*32 bytes) so no burst crosses a 4 KiB
// page. One port per PE and the 256-bit AXI3 port follow the paper; bursts,
// counts and the absence of IDs are this design's own choices; responses are
// assumed OKAY.
module hbm_port_master
  import nero_pkg::*;
#(
  parameter int unsigned MAX_BURST = 16,
  parameter int unsigned CNT_W     = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [HBM_AW-1:0] rd_base,
  input  logic [CNT_W-1:0]  rd_beats,
  input  logic [HBM_AW-1:0] wr_base,
  input  logic [CNT_W-1:0]  wr_beats,
  output logic              busy,
  output logic              done,
  // AXI3 port
  output logic              ar_valid,
  input  logic              ar_ready,
  output axi_addr_t         ar,
  input  logic              r_valid,
  output logic              r_ready,
  input  axi_r_t            r,
  output logic              aw_valid,
  input  logic              aw_ready,
  output axi_addr_t         aw,
  output logic              w_valid,
  input  logic              w_ready,
  output axi_w_t            w,
  input  logic              b_valid,
  output logic              b_ready,
  // streams
  output logic              rd_valid,
  input  logic              rd_ready,
  output logic [HBM_W-1:0]  rd_data,
  output logic              rd_last,
  input  logic              wr_valid,
  output logic              wr_ready,
  input  logic [HBM_W-1:0]  wr_data
);

  localparam int unsigned BYTES = HBM_W / 8;

  logic [CNT_W-1:0]  ar_left, r_left, aw_left, w_left, b_left;
  logic [HBM_AW-1:0] ar_addr, aw_addr;
  logic              active;

  function automatic logic [CNT_W-1:0] burst_beats(input logic [CNT_W-1:0] left);
    return (left > CNT_W'(MAX_BURST)) ? CNT_W'(MAX_BURST) : left;
  endfunction

  // AR channel
  assign ar_valid = active && (ar_left != '0);
  assign ar.addr  = ar_addr;
  assign ar.len   = AXI_LEN'(burst_beats(ar_left) - CNT_W'(1));

  // R channel -> read stream
  assign rd_valid = r_valid && (r_left != '0);
  assign rd_data  = r.data;
  assign rd_last  = (r_left == CNT_W'(1));
  assign r_ready  = rd_ready;

  // AW channel
  assign aw_valid = active && (aw_left != '0);
  assign aw.addr  = aw_addr;
  assign aw.len   = AXI_LEN'(burst_beats(aw_left) - CNT_W'(1));

  // W channel: bursts are framed from the total, in the same order as AW
  logic [CNT_W-1:0] w_pos;     // beat index inside the current burst
  logic [CNT_W-1:0] w_blen;    // length of the current burst
  assign w_blen   = burst_beats(w_left + w_pos);
  assign w_valid  = active && wr_valid && (w_left != '0);
  assign wr_ready = active && w_ready && (w_left != '0);
  assign w.data   = wr_data;
  assign w.strb   = '1;
  assign w.last   = (w_pos == w_blen - CNT_W'(1));

  assign b_ready  = 1'b1;
  assign busy     = active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; done <= 1'b0;
      ar_left <= '0; r_left <= '0; aw_left <= '0; w_left <= '0; b_left <= '0;
      ar_addr <= '0; aw_addr <= '0; w_pos <= '0;
    end else begin
      done <= 1'b0;
      if (start && !active) begin
        active  <= 1'b1;
        ar_left <= rd_beats; r_left <= rd_beats; ar_addr <= rd_base;
        aw_left <= wr_beats; w_left <= wr_beats; aw_addr <= wr_base;
        b_left  <= (wr_beats + CNT_W'(MAX_BURST - 1)) / CNT_W'(MAX_BURST);
        w_pos   <= '0;
      end else if (active) begin
        if (ar_valid && ar_ready) begin
          ar_left <= ar_left - burst_beats(ar_left);
          ar_addr <= ar_addr + HBM_AW'(MAX_BURST * BYTES);
        end
        if (r_valid && r_ready && r_left != '0) r_left <= r_left - CNT_W'(1);
        if (aw_valid && aw_ready) begin
          aw_left <= aw_left - burst_beats(aw_left);
          aw_addr <= aw_addr + HBM_AW'(MAX_BURST * BYTES);
        end
        if (w_valid && w_ready) begin
          w_left <= w_left - CNT_W'(1);
          w_pos  <= w.last ? '0 : w_pos + CNT_W'(1);
        end
        if (b_valid && b_left != '0) b_left <= b_left - CNT_W'(1);
        if (ar_left == '0 && r_left == '0 && aw_left == '0 && w_left == '0 && b_left == '0) begin
          active <= 1'b0;
          done   <= 1'b1;
        end
      end
    end
  end

endmodule
