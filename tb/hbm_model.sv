// hbm_model: behavioural model of one HBM2 pseudo-channel behind the vendor
// memory controller, as seen on its 256-bit AXI3 port. Not synthesizable and not
// part of the design: it stands in for the HBM stack and its controller in
// simulation.
//
// Addresses and write bursts are queued; write data of a burst is stored at
// consecutive 32-byte beats and answered with one B response after wlast. Read
// bursts return one beat per cycle after LAT cycles when r_ready allows, wlast /
// rlast on the final beat. Ready signals toggle pseudo-randomly when STALL is
// set, to exercise back-pressure. Unwritten locations read as zero.
module hbm_model
  import nero_pkg::*;
#(
  parameter int unsigned LAT   = 4,
  parameter bit          STALL = 1'b0
) (
  input  logic      clk,
  input  logic      ar_valid,
  output logic      ar_ready,
  input  axi_addr_t ar,
  output logic      r_valid,
  input  logic      r_ready,
  output axi_r_t    r,
  input  logic      aw_valid,
  output logic      aw_ready,
  input  axi_addr_t aw,
  input  logic      w_valid,
  output logic      w_ready,
  input  axi_w_t    w,
  output logic      b_valid,
  input  logic      b_ready
);

  logic [HBM_W-1:0] mem [logic [HBM_AW-1:0]];
  axi_addr_t rq [$];
  axi_addr_t wq [$];
  int        b_pending = 0;
  int        r_beat = 0;
  int        r_wait = 0;
  int        w_beat = 0;
  int        protocol_errors = 0;
  int        max_len_seen = 0;
  bit        rnd_ar, rnd_aw, rnd_w;

  assign ar_ready = !STALL || rnd_ar;
  assign aw_ready = !STALL || rnd_aw;
  assign w_ready  = (wq.size() != 0) && (!STALL || rnd_w);
  assign b_valid  = (b_pending != 0);

  function automatic logic [HBM_AW-1:0] beat_addr(input axi_addr_t a, input int i);
    return (a.addr >> 5) + HBM_AW'(i);
  endfunction

  always_comb begin
    r_valid = (rq.size() != 0) && (r_wait >= int'(LAT));
    r.data  = '0;
    r.last  = 1'b0;
    if (r_valid) begin
      r.data = mem.exists(beat_addr(rq[0], r_beat)) ? mem[beat_addr(rq[0], r_beat)] : '0;
      r.last = (r_beat == int'(rq[0].len));
    end
  end

  always @(posedge clk) begin
    rnd_ar <= ($urandom % 4) != 0;
    rnd_aw <= ($urandom % 4) != 0;
    rnd_w  <= ($urandom % 4) != 0;
    if (ar_valid && ar_ready) begin
      rq.push_back(ar);
      if (int'(ar.len) + 1 > max_len_seen) max_len_seen <= int'(ar.len) + 1;
    end
    if (aw_valid && aw_ready) wq.push_back(aw);
    if (rq.size() != 0 && r_wait < int'(LAT)) r_wait <= r_wait + 1;
    if (r_valid && r_ready) begin
      if (r_beat == int'(rq[0].len)) begin
        void'(rq.pop_front());
        r_beat <= 0;
        r_wait <= 0;
      end else r_beat <= r_beat + 1;
    end
    if (w_valid && w_ready) begin
      mem[beat_addr(wq[0], w_beat)] = w.data;
      if (w.last != (w_beat == int'(wq[0].len))) protocol_errors <= protocol_errors + 1;
      if (w_beat == int'(wq[0].len)) begin
        void'(wq.pop_front());
        w_beat <= 0;
        b_pending <= b_pending + 1 - ((b_valid && b_ready) ? 1 : 0);
      end else begin
        w_beat <= w_beat + 1;
        if (b_valid && b_ready) b_pending <= b_pending - 1;
      end
    end else if (b_valid && b_ready) b_pending <= b_pending - 1;
  end

endmodule
