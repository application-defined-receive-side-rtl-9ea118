// rsd_array: N_RSD parallel Receive Side Dispatch units.
//
// Packets are sharded by message ID (msg_id mod N_RSD), so all packets of a
// message pass through the same RSD in arrival order and the first packet's
// result always reaches the dispatch cache before the message's later packets.
// Outputs are merged by a round-robin arbiter that holds its grant for a whole
// packet. Every RSD receives the same configuration writes, so all hold the
// same rules. Sharding by message ID and the four RSDs follow the paper; the
// modulo hash and the round-robin merge are this design's choices.
//
// Interface: in_* is the packet filter's stream (valid/ready, metadata held
// over the packet), out_* the merged rsd_out_t stream. The ev_* outputs
// are OR-ed event pulses of the units, busy is one bit per RSD.
module rsd_array #(
  parameter int unsigned N_RSD       = 4,
  parameter int unsigned NFIFO       = 64,
  parameter int unsigned FIFO_DEPTH  = 128,
  parameter int unsigned CAM_ENTRIES = 512,
  parameter int unsigned BUF_DEPTH   = 32
) (
  input  logic               clk,
  input  logic               rst,
  input  qn_pkg::cfg_t       cfg,
  input  logic               in_valid,
  output logic               in_ready,
  input  qn_pkg::beat_t      in_beat,
  input  qn_pkg::pkt_meta_t  in_meta,
  output logic               out_valid,
  input  logic               out_ready,
  output qn_pkg::rsd_out_t   out,
  output logic               ev_result,
  output logic               ev_default,
  output logic               ev_lookup,
  output logic               ev_seg_saved,
  output logic [N_RSD-1:0]   busy
);
  import qn_pkg::*;
  localparam int unsigned SW = (N_RSD > 1) ? $clog2(N_RSD) : 1;

  // ---- shard --------------------------------------------------------------
  logic [SW-1:0] sel;
  assign sel = SW'(in_meta.msg_id % N_RSD);

  logic [N_RSD-1:0] u_in_ready, u_out_valid, u_out_ready;
  logic [N_RSD-1:0] u_res, u_def, u_lk, u_seg;
  rsd_out_t         u_out [N_RSD];

  assign in_ready = u_in_ready[sel];

  for (genvar i = 0; i < N_RSD; i++) begin : g_rsd
    rsd #(.NFIFO(NFIFO), .FIFO_DEPTH(FIFO_DEPTH), .CAM_ENTRIES(CAM_ENTRIES), .BUF_DEPTH(BUF_DEPTH)) u_rsd (
      .clk, .rst, .cfg,
      .in_valid(in_valid && sel == SW'(i)), .in_ready(u_in_ready[i]),
      .in_beat, .in_meta,
      .out_valid(u_out_valid[i]), .out_ready(u_out_ready[i]), .out(u_out[i]),
      .ev_result(u_res[i]), .ev_default(u_def[i]), .ev_lookup(u_lk[i]), .ev_seg_saved(u_seg[i])
    );
    assign busy[i] = u_out_valid[i] || !u_in_ready[i];
  end

  assign ev_result    = |u_res;
  assign ev_default   = |u_def;
  assign ev_lookup    = |u_lk;
  assign ev_seg_saved = |u_seg;

  // ---- merge --------------------------------------------------------------
  logic [SW-1:0] grant, last_grant;
  logic          locked;

  always_comb begin
    grant = last_grant;
    if (!locked) begin
      for (int k = N_RSD; k >= 1; k--) begin
        automatic int c = (int'(last_grant) + k) % N_RSD;
        if (u_out_valid[c]) grant = SW'(c);
      end
    end
  end

  assign out_valid = u_out_valid[grant];
  assign out       = u_out[grant];
  always_comb begin
    u_out_ready = '0;
    u_out_ready[grant] = out_ready;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      last_grant <= SW'(N_RSD - 1);
      locked     <= 1'b0;
    end else if (out_valid && out_ready) begin
      last_grant <= grant;
      locked     <= !out.beat.last;
    end
  end
endmodule
