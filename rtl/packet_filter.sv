// packet_filter: first stage of the QingNiao RX path.
//
// Checks each frame's header beat (EtherType IPv4, IP protocol UDP, UDP
// destination port QNP_PORT), parses the QNP header out of it and forwards
// the frame with its metadata: message ID, message length and packet
// sequence number, app ID, message type, flag, seg_cnt and the payload length
// (UDP length minus the UDP and QNP headers). Frames that are not QNP are
// discarded, as are the frames of any application the controller has marked
// as under reconfiguration (CFG_DROP), which lets rules be rewritten without
// disturbing other applications.
//
// Parsing the metadata and the reconfiguration discard follow the paper.
// Discarding non-QNP frames (rather than handing them to a plain NIC path),
// the UDP port and the header field positions are this design's choices.
//
// Timing: one register stage; a beat accepted in cycle t is offered at t+1.
// Streams are valid/ready; the output metadata is held over the packet.
module packet_filter #(
  parameter logic [15:0] QNP_PORT = 16'd9000
) (
  input  logic               clk,
  input  logic               rst,
  input  qn_pkg::cfg_t       cfg,
  input  logic               in_valid,
  output logic               in_ready,
  input  qn_pkg::beat_t      in_beat,
  output logic               out_valid,
  input  logic               out_ready,
  output qn_pkg::beat_t      out_beat,
  output qn_pkg::pkt_meta_t  out_meta,
  output logic               ev_drop_cfg,    // frame discarded: app under reconfiguration
  output logic               ev_drop_other   // frame discarded: not QNP
);
  import qn_pkg::*;

  logic [255:0] drop_app;
  always_ff @(posedge clk) begin
    if (rst) drop_app <= '0;
    else if (cfg.valid && cfg.target == CFG_DROP) drop_app[cfg.addr[7:0]] <= cfg.wdata[0];
  end

  function automatic logic [7:0] byte_at(beat_t b, int unsigned i);
    return b.data[8*i +: 8];
  endfunction

  // parse the header beat
  pkt_meta_t m;
  logic      is_qnp;
  logic [15:0] udp_len;
  always_comb begin
    udp_len       = {byte_at(in_beat, OFF_UDP_LEN), byte_at(in_beat, OFF_UDP_LEN + 1)};
    is_qnp        = {byte_at(in_beat, OFF_ETHTYPE), byte_at(in_beat, OFF_ETHTYPE + 1)} == 16'h0800 &&
                    byte_at(in_beat, OFF_IPPROTO) == 8'd17 &&
                    {byte_at(in_beat, OFF_UDP_DST), byte_at(in_beat, OFF_UDP_DST + 1)} == QNP_PORT &&
                    udp_len >= 16'(UDP_HDR_BYTES + QNP_HDR_BYTES);
    m.app_id       = byte_at(in_beat, OFF_QNP + 0);
    m.msg_type     = byte_at(in_beat, OFF_QNP + 1);
    m.msg_id       = {byte_at(in_beat, OFF_QNP + 5), byte_at(in_beat, OFF_QNP + 4),
                      byte_at(in_beat, OFF_QNP + 3), byte_at(in_beat, OFF_QNP + 2)};
    m.msg_acked_id = {byte_at(in_beat, OFF_QNP + 9), byte_at(in_beat, OFF_QNP + 8),
                      byte_at(in_beat, OFF_QNP + 7), byte_at(in_beat, OFF_QNP + 6)};
    m.msg_len      = byte_at(in_beat, OFF_QNP + 10);
    m.pkt_seq      = byte_at(in_beat, OFF_QNP + 11);
    m.pkt_flag     = byte_at(in_beat, OFF_QNP + 12);
    m.seg_cnt      = byte_at(in_beat, OFF_QNP + 13);
    m.payload_len  = udp_len - 16'(UDP_HDR_BYTES + QNP_HDR_BYTES);
  end

  // packet state: at a header beat decide pass or drop for the whole frame
  logic in_pkt, dropping;
  logic head_pass, pass;
  pkt_meta_t cur_meta;

  assign head_pass = is_qnp && !drop_app[m.app_id];
  assign pass      = in_pkt ? !dropping : head_pass;
  assign in_ready  = !out_valid || out_ready || !pass;

  always_ff @(posedge clk) begin
    if (rst) begin
      in_pkt        <= 1'b0;
      dropping      <= 1'b0;
      out_valid     <= 1'b0;
      ev_drop_cfg   <= 1'b0;
      ev_drop_other <= 1'b0;
      cur_meta      <= '0;
    end else begin
      ev_drop_cfg   <= 1'b0;
      ev_drop_other <= 1'b0;
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        if (!in_pkt) begin
          cur_meta      <= m;
          dropping      <= !head_pass;
          ev_drop_cfg   <= is_qnp && drop_app[m.app_id];
          ev_drop_other <= !is_qnp;
        end
        in_pkt <= !in_beat.last;
        if (pass) begin
          out_valid <= 1'b1;
          out_beat  <= in_beat;
          out_meta  <= in_pkt ? cur_meta : m;
        end
      end
    end
  end
endmodule
