// qn_rx_top: the QingNiao receive path, L7 dispatch on the NIC.
//
// Frames from the Ethernet MAC (512-bit AXI-Stream) pass through
//   packet_filter  -> parse QNP metadata, discard non-QNP frames and frames
//                     of applications under reconfiguration;
//   rsd_array      -> N_RSD parallel RSDs, sharded by message ID; the first
//                     packet of each message is matched against the
//                     skip-and-match rules to choose an RX queue;
//   pkt_rx_engine  -> fetches a descriptor from that queue for a new message,
//                     finds later packets' queue in the dispatch_cache and
//                     their descriptor in msg_rx_engine, and DMAs each
//                     packet's payload to its place in the message buffer;
//   msg_rx_engine  -> tracks which packets of each message have arrived,
//                     notifies the host when a message is complete and
//                     reclaims messages idle longer than the timeout.
// No packet is buffered beyond the RSD's transient buffer and no message is
// reassembled on the NIC. This structure follows the paper (Fig. 6).
//
// Ports outside the design proper: the queue manager's descriptor fetch
// (desc_*), the DMA engine's write port (dma_*), host notifications (cpl_*)
// and the controller's configuration writes (cfg). stats counts the events of
// every mechanism. Reset is synchronous and active high.
module qn_rx_top #(
  parameter int unsigned N_RSD         = 4,
  parameter int unsigned NFIFO         = 64,
  parameter int unsigned FIFO_DEPTH    = 128,
  parameter int unsigned CAM_ENTRIES   = 512,
  parameter int unsigned BUF_DEPTH     = 32,
  parameter int unsigned CACHE_DEPTH   = 128,
  parameter int unsigned MSG_ENTRIES   = 512,
  parameter int unsigned TICK_DIV      = 16,
  parameter int unsigned TIMEOUT_TICKS = 15_625_000,
  parameter int unsigned CHUNK_BYTES   = 1500,
  parameter logic [15:0] QNP_PORT      = 16'd9000
) (
  input  logic               clk,
  input  logic               rst,
  // Ethernet MAC receive stream
  input  logic [511:0]       s_axis_tdata,
  input  logic [63:0]        s_axis_tkeep,
  input  logic               s_axis_tlast,
  input  logic               s_axis_tvalid,
  output logic               s_axis_tready,
  // controller
  input  qn_pkg::cfg_t       cfg,
  // queue manager: descriptor fetch
  output logic               desc_req_valid,
  input  logic               desc_req_ready,
  output logic [7:0]         desc_req_rxq,
  input  logic               desc_rsp_valid,
  input  logic               desc_rsp_ok,
  input  qn_pkg::desc_t      desc_rsp_desc,
  // DMA engine: payload writes to host memory
  output logic               dma_valid,
  input  logic               dma_ready,
  output logic [63:0]        dma_addr,
  output logic [511:0]       dma_data,
  output logic [6:0]         dma_len,
  // host notification: message complete or expired
  output logic               cpl_valid,
  input  logic               cpl_ready,
  output qn_pkg::cpl_t       cpl,
  output qn_pkg::stats_t     stats,
  output logic [N_RSD-1:0]   rsd_busy,      // RSD holds or is taking a packet
  output logic [$clog2(MSG_ENTRIES):0] msgs_active
);
  import qn_pkg::*;

  beat_t in_beat;
  assign in_beat = '{data: s_axis_tdata, keep: s_axis_tkeep, last: s_axis_tlast};

  // filter -> RSDs
  logic      f_valid, f_ready;
  beat_t     f_beat;
  pkt_meta_t f_meta;
  logic      ev_drop_cfg, ev_drop_other;

  packet_filter #(.QNP_PORT(QNP_PORT)) u_filter (
    .clk, .rst, .cfg,
    .in_valid(s_axis_tvalid), .in_ready(s_axis_tready), .in_beat,
    .out_valid(f_valid), .out_ready(f_ready), .out_beat(f_beat), .out_meta(f_meta),
    .ev_drop_cfg, .ev_drop_other
  );

  // RSDs -> packet engine
  logic       r_valid, r_ready;
  rsd_out_t   r_out;
  logic       ev_result, ev_default, ev_lookup, ev_seg_saved;

  rsd_array #(.N_RSD(N_RSD), .NFIFO(NFIFO), .FIFO_DEPTH(FIFO_DEPTH),
              .CAM_ENTRIES(CAM_ENTRIES), .BUF_DEPTH(BUF_DEPTH)) u_rsds (
    .clk, .rst, .cfg,
    .in_valid(f_valid), .in_ready(f_ready), .in_beat(f_beat), .in_meta(f_meta),
    .out_valid(r_valid), .out_ready(r_ready), .out(r_out),
    .ev_result, .ev_default, .ev_lookup, .ev_seg_saved, .busy(rsd_busy)
  );

  // packet engine, cache, message engine
  logic        mc_valid, mc_ready, mr_valid, mr_found, mr_free;
  logic [1:0]  mc_op;
  logic [31:0] mc_msg_id;
  logic [7:0]  mc_rxq, mc_len, mc_seq;
  desc_t       mc_desc, mr_desc;
  logic        cf_en, cl_en, cr_valid, cr_hit, inval_en;
  logic [31:0] cf_id, cl_id, inval_id;
  logic [7:0]  cf_rxq, cr_rxq;
  logic        ev_cache_hit, ev_drop_nofirst, ev_drop_engine, ev_pkt_done;

  pkt_rx_engine #(.CHUNK_BYTES(CHUNK_BYTES)) u_pkt (
    .clk, .rst,
    .in_valid(r_valid), .in_ready(r_ready), .in(r_out),
    .desc_req_valid, .desc_req_ready, .desc_req_rxq,
    .desc_rsp_valid, .desc_rsp_ok, .desc_rsp_desc,
    .dma_valid, .dma_ready, .dma_addr, .dma_data, .dma_len,
    .msg_cmd_valid(mc_valid), .msg_cmd_ready(mc_ready), .msg_cmd_op(mc_op),
    .msg_cmd_msg_id(mc_msg_id), .msg_cmd_rxq(mc_rxq), .msg_cmd_len(mc_len),
    .msg_cmd_seq(mc_seq), .msg_cmd_desc(mc_desc),
    .msg_rsp_valid(mr_valid), .msg_rsp_found(mr_found), .msg_rsp_free(mr_free), .msg_rsp_desc(mr_desc),
    .cache_fill_en(cf_en), .cache_fill_msg_id(cf_id), .cache_fill_rxq(cf_rxq),
    .cache_lk_en(cl_en), .cache_lk_msg_id(cl_id),
    .cache_rsp_valid(cr_valid), .cache_rsp_hit(cr_hit), .cache_rsp_rxq(cr_rxq),
    .ev_cache_hit, .ev_drop_nofirst, .ev_drop_other(ev_drop_engine), .ev_pkt_done
  );

  dispatch_cache #(.DEPTH(CACHE_DEPTH)) u_cache (
    .clk, .rst,
    .fill_en(cf_en), .fill_msg_id(cf_id), .fill_rxq(cf_rxq),
    .inval_en, .inval_msg_id(inval_id),
    .lk_en(cl_en), .lk_msg_id(cl_id),
    .rsp_valid(cr_valid), .rsp_hit(cr_hit), .rsp_rxq(cr_rxq)
  );

  msg_rx_engine #(.ENTRIES(MSG_ENTRIES), .TICK_DIV(TICK_DIV), .TIMEOUT_TICKS(TIMEOUT_TICKS)) u_msg (
    .clk, .rst,
    .cmd_valid(mc_valid), .cmd_ready(mc_ready), .cmd_op(mc_op), .cmd_msg_id(mc_msg_id),
    .cmd_rxq(mc_rxq), .cmd_len(mc_len), .cmd_seq(mc_seq), .cmd_desc(mc_desc),
    .rsp_valid(mr_valid), .rsp_found(mr_found), .rsp_free(mr_free), .rsp_desc(mr_desc), .rsp_rxq(),
    .cpl_valid, .cpl_ready, .cpl,
    .inval_en, .inval_msg_id(inval_id), .active(msgs_active)
  );

  // event counters
  logic cpl_fire;
  assign cpl_fire = cpl_valid && cpl_ready;
  always_ff @(posedge clk) begin
    if (rst) begin
      stats <= '0;
    end else begin
      stats.filter_drop_cfg   <= stats.filter_drop_cfg   + 32'(ev_drop_cfg);
      stats.filter_drop_other <= stats.filter_drop_other + 32'(ev_drop_other);
      stats.rsd_results       <= stats.rsd_results       + 32'(ev_result);
      stats.rsd_default       <= stats.rsd_default       + 32'(ev_default);
      stats.rsd_lookups       <= stats.rsd_lookups       + 32'(ev_lookup);
      stats.seg_saved         <= stats.seg_saved         + 32'(ev_seg_saved);
      stats.cache_hits        <= stats.cache_hits        + 32'(ev_cache_hit);
      stats.drop_nofirst      <= stats.drop_nofirst      + 32'(ev_drop_nofirst);
      stats.drop_engine       <= stats.drop_engine       + 32'(ev_drop_engine);
      stats.pkts_delivered    <= stats.pkts_delivered    + 32'(ev_pkt_done);
      stats.msgs_complete     <= stats.msgs_complete     + 32'(cpl_fire && !cpl.expired);
      stats.msgs_expired      <= stats.msgs_expired      + 32'(cpl_fire && cpl.expired);
    end
  end
endmodule
