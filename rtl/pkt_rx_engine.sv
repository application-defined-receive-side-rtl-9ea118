// pkt_rx_engine: delivers each dispatched packet's payload into host memory.
//
// For each packet leaving the RSDs, the engine first works out where it goes:
//   first packet of a message (matched by an RSD): probe the message table;
//     if the message's slot is free, fetch a descriptor from the RX queue the
//     RSD chose, open the message entry and write the queue into the dispatch
//     cache; if the message is already open (a repeated first packet), reuse
//     its descriptor; if the slot holds another message, or the queue has no
//     descriptor, discard the packet;
//   later packet: look its message up in the dispatch cache; on a miss (first
//     packet never seen, or message already finished) discard the packet;
//     on a hit take the descriptor from the message table.
// It then streams the payload beats (not the header beat) as DMA writes to
// descriptor address + pkt_seq * CHUNK_BYTES + 64 * beat, and finally tells
// the message table the packet has arrived (RECV), which may complete the
// message and notify the host.
//
// The descriptor fetch from the chosen queue, the per-message descriptor and
// the sequence-number offset follow the paper (Fig. 6 steps 3-4). The offset
// stride CHUNK_BYTES = 1500 (the library's packet size), the probe before the
// fetch and the discard rules for collisions and empty queues are this
// design's choices.
//
// Interfaces: rsd_out_t stream in (valid/ready); descriptor request/response
// to the queue manager; DMA write beats (valid/ready, address, data, byte
// count); command/response port of msg_rx_engine; dispatch_cache ports.
module pkt_rx_engine #(
  parameter int unsigned CHUNK_BYTES = 1500
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              in_valid,
  output logic              in_ready,
  input  qn_pkg::rsd_out_t  in,
  // descriptor fetch
  output logic              desc_req_valid,
  input  logic              desc_req_ready,
  output logic [7:0]        desc_req_rxq,
  input  logic              desc_rsp_valid,
  input  logic              desc_rsp_ok,
  input  qn_pkg::desc_t     desc_rsp_desc,
  // DMA write
  output logic              dma_valid,
  input  logic              dma_ready,
  output logic [63:0]       dma_addr,
  output logic [511:0]      dma_data,
  output logic [6:0]        dma_len,
  // message table
  output logic              msg_cmd_valid,
  input  logic              msg_cmd_ready,
  output logic [1:0]        msg_cmd_op,
  output logic [31:0]       msg_cmd_msg_id,
  output logic [7:0]        msg_cmd_rxq,
  output logic [7:0]        msg_cmd_len,
  output logic [7:0]        msg_cmd_seq,
  output qn_pkg::desc_t     msg_cmd_desc,
  input  logic              msg_rsp_valid,
  input  logic              msg_rsp_found,
  input  logic              msg_rsp_free,
  input  qn_pkg::desc_t     msg_rsp_desc,
  // dispatch cache
  output logic              cache_fill_en,
  output logic [31:0]       cache_fill_msg_id,
  output logic [7:0]        cache_fill_rxq,
  output logic              cache_lk_en,
  output logic [31:0]       cache_lk_msg_id,
  input  logic              cache_rsp_valid,
  input  logic              cache_rsp_hit,
  input  logic [7:0]        cache_rsp_rxq,
  // events
  output logic              ev_cache_hit,
  output logic              ev_drop_nofirst,
  output logic              ev_drop_other,
  output logic              ev_pkt_done
);
  import qn_pkg::*;
  localparam logic [1:0] OP_PROBE = 2'd0, OP_ALLOC = 2'd1, OP_RECV = 2'd2;

  typedef enum logic [3:0] {
    P_HEAD, P_PROBE, P_PROBE_W, P_DESC, P_DESC_W, P_ALLOC,
    P_CACHE, P_CACHE_W, P_LOOK, P_LOOK_W, P_HDR, P_DATA, P_RECV, P_DROP
  } pstate_e;
  pstate_e st;

  pkt_meta_t  meta;
  logic [7:0] rxq;
  desc_t      desc;
  logic [7:0] beat_no;
  logic [6:0] keep_cnt;

  always_comb begin
    keep_cnt = '0;
    for (int b = 0; b < 64; b++) keep_cnt += 7'(in.beat.keep[b]);
  end

  // outputs by state
  assign desc_req_valid = (st == P_DESC);
  assign desc_req_rxq   = rxq;

  assign msg_cmd_valid  = (st == P_PROBE) || (st == P_ALLOC) || (st == P_LOOK) || (st == P_RECV);
  assign msg_cmd_op     = (st == P_ALLOC) ? OP_ALLOC : (st == P_RECV) ? OP_RECV : OP_PROBE;
  assign msg_cmd_msg_id = meta.msg_id;
  assign msg_cmd_rxq    = rxq;
  assign msg_cmd_len    = meta.msg_len;
  assign msg_cmd_seq    = meta.pkt_seq;
  assign msg_cmd_desc   = desc;

  assign cache_lk_en     = (st == P_CACHE);
  assign cache_lk_msg_id = meta.msg_id;

  assign dma_valid = (st == P_DATA) && in_valid;
  assign dma_addr  = desc.addr + 64'(meta.pkt_seq) * 64'(CHUNK_BYTES) + 64'(beat_no - 8'd1) * 64'd64;
  assign dma_data  = in.beat.data;
  assign dma_len   = keep_cnt;

  assign in_ready = (st == P_HDR) || (st == P_DROP) || (st == P_DATA && dma_ready);

  always_ff @(posedge clk) begin
    if (rst) begin
      st              <= P_HEAD;
      cache_fill_en   <= 1'b0;
      ev_cache_hit    <= 1'b0;
      ev_drop_nofirst <= 1'b0;
      ev_drop_other   <= 1'b0;
      ev_pkt_done     <= 1'b0;
      beat_no         <= '0;
    end else begin
      cache_fill_en   <= 1'b0;
      ev_cache_hit    <= 1'b0;
      ev_drop_nofirst <= 1'b0;
      ev_drop_other   <= 1'b0;
      ev_pkt_done     <= 1'b0;
      unique case (st)
        P_HEAD: if (in_valid) begin
          meta <= in.meta;
          rxq  <= in.rxq;
          st   <= in.first ? P_PROBE : P_CACHE;
        end
        P_PROBE:   if (msg_cmd_ready) st <= P_PROBE_W;
        P_PROBE_W: if (msg_rsp_valid) begin
          if (msg_rsp_found) begin
            desc <= msg_rsp_desc;
            st   <= P_HDR;
          end else if (msg_rsp_free) begin
            st <= P_DESC;
          end else begin
            ev_drop_other <= 1'b1;
            st <= P_DROP;
          end
        end
        P_DESC:   if (desc_req_ready) st <= P_DESC_W;
        P_DESC_W: if (desc_rsp_valid) begin
          desc <= desc_rsp_desc;
          if (desc_rsp_ok) st <= P_ALLOC;
          else begin
            ev_drop_other <= 1'b1;
            st <= P_DROP;
          end
        end
        P_ALLOC: if (msg_cmd_ready) begin
          cache_fill_en     <= 1'b1;
          cache_fill_msg_id <= meta.msg_id;
          cache_fill_rxq    <= rxq;
          st <= P_HDR;
        end
        P_CACHE:   st <= P_CACHE_W;
        P_CACHE_W: if (cache_rsp_valid) begin
          if (cache_rsp_hit) begin
            rxq          <= cache_rsp_rxq;
            ev_cache_hit <= 1'b1;
            st           <= P_LOOK;
          end else begin
            ev_drop_nofirst <= 1'b1;
            st <= P_DROP;
          end
        end
        P_LOOK:   if (msg_cmd_ready) st <= P_LOOK_W;
        P_LOOK_W: if (msg_rsp_valid) begin
          if (msg_rsp_found) begin
            desc <= msg_rsp_desc;
            st   <= P_HDR;
          end else begin
            ev_drop_nofirst <= 1'b1;
            st <= P_DROP;
          end
        end
        P_HDR: if (in_valid) begin          // header beat is not DMAed
          beat_no <= 8'd1;
          st      <= in.beat.last ? P_RECV : P_DATA;
        end
        P_DATA: if (in_valid && dma_ready) begin
          beat_no <= beat_no + 8'd1;
          if (in.beat.last) st <= P_RECV;
        end
        P_RECV: if (msg_cmd_ready) begin
          ev_pkt_done <= 1'b1;
          st <= P_HEAD;
        end
        P_DROP: if (in_valid && in.beat.last) st <= P_HEAD;
        default: st <= P_HEAD;
      endcase
    end
  end

  a_cache_wait: assert property (@(posedge clk) disable iff (rst) st == P_CACHE |=> st == P_CACHE_W);
endmodule
