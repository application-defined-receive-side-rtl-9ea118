// qn_pkg: types and constants shared by the QingNiao receive path.
//
// The RX datapath moves 512-bit AXI-Stream beats (64 byte lanes, byte 0 of
// the frame in bits [7:0]). A QNP packet starts with one 64-byte header
// beat: Ethernet (14 B), IPv4 (20 B), UDP (8 B) and the 22-byte QNP header
// padded so that the headers end exactly on the first beat boundary; the
// payload, a sequence of TLV-encoded message fields, starts in beat 1.
//
// Dispatch rules live in two tables per RSD: a CAM of match states (96-bit
// entries: 24-bit key {app ID, message type, field index}, 8-bit state,
// 8-byte match string) and a RAM of skip states (32-bit entries: field
// index, bytes to skip, bytes to inspect, next state). A RAM entry that
// skips and inspects zero bytes terminates the rule; its state field is then
// the RX queue. A skip count of 0xff means SkipUntil('/'). These widths and
// encodings follow the paper. The value 0xff as the "initial state" that
// starts every rule walk, the QNP field order and byte order inside the
// header beat, and the configuration word layout are this design's choices.
package qn_pkg;

  localparam int unsigned BEAT_BYTES = 64;
  localparam int unsigned DATA_W     = 8 * BEAT_BYTES;

  // One AXI-Stream beat.
  typedef struct packed {
    logic [DATA_W-1:0]     data;
    logic [BEAT_BYTES-1:0] keep;
    logic                  last;
  } beat_t;

  // Byte offsets inside the header beat.
  localparam int unsigned OFF_ETHTYPE  = 12;  // 2 B, big endian
  localparam int unsigned OFF_IPPROTO  = 23;
  localparam int unsigned OFF_UDP_DST  = 36;  // 2 B, big endian
  localparam int unsigned OFF_UDP_LEN  = 38;  // 2 B, big endian
  localparam int unsigned OFF_QNP      = 42;  // QNP header, packed, little endian
  localparam int unsigned QNP_HDR_BYTES = 22; // 14 B of fields + 8 B padding
  localparam int unsigned UDP_HDR_BYTES = 8;

  // QNP packet metadata extracted by the packet filter.
  typedef struct packed {
    logic [7:0]  app_id;
    logic [7:0]  msg_type;
    logic [31:0] msg_id;
    logic [31:0] msg_acked_id;
    logic [7:0]  msg_len;       // message length in packets
    logic [7:0]  pkt_seq;       // packet sequence number within the message
    logic [7:0]  pkt_flag;      // DATA or ACK
    logic [7:0]  seg_cnt;       // payload beats holding dispatch_info, 0 = all
    logic [15:0] payload_len;   // QNP payload bytes (from the UDP length)
  } pkt_meta_t;

  // Matcher RAM entry (skip state), 32 bits.
  typedef struct packed {
    logic [7:0] field_idx;
    logic [7:0] skip;       // 0xff = SkipUntil('/')
    logic [7:0] inspect;    // bytes to match, 0..8
    logic [7:0] state;      // next state, or RX queue when terminal
  } ram_entry_t;

  // Matcher CAM entry (match state), 96 bits.
  typedef struct packed {
    logic [7:0]  app_id;
    logic [7:0]  msg_type;
    logic [7:0]  field_idx;
    logic [7:0]  state;
    logic [63:0] data;      // byte 0 of the string in bits [7:0]
  } cam_entry_t;

  localparam logic [7:0] SKIP_UNTIL = 8'hff;
  localparam logic [7:0] INIT_STATE = 8'hff;
  localparam logic [7:0] UNTIL_CHAR = 8'h2f;   // '/'
  localparam int unsigned MATCH_BYTES = 8;

  // 16-byte host descriptor.
  typedef struct packed {
    logic [31:0] rsvd;
    logic [31:0] len;
    logic [63:0] addr;
  } desc_t;

  // Run-time configuration written by the host controller.
  typedef enum logic [2:0] {
    CFG_CAM  = 3'd0,   // addr = entry, wdata[95:0] = cam_entry_t, wdata[96] = valid
    CFG_RAM  = 3'd1,   // addr = entry, wdata[31:0] = ram_entry_t
    CFG_DROP = 3'd2,   // addr[7:0] = app ID, wdata[0] = discard its packets
    CFG_DEFQ = 3'd3    // wdata[7:0] = RX queue for messages no rule matches
  } cfg_target_e;

  typedef struct packed {
    logic        valid;
    cfg_target_e target;
    logic [8:0]  addr;
    logic [96:0] wdata;
  } cfg_t;

  // Packet leaving the RSDs: a beat with its packet's metadata and result.
  typedef struct packed {
    beat_t      beat;
    pkt_meta_t  meta;
    logic [7:0] rxq;        // dispatch result, valid when first is set
    logic       first;      // packet was matched (sequence number 0)
  } rsd_out_t;

  // Message notification to the host.
  typedef struct packed {
    logic        expired;   // 1: message timed out and was reclaimed
    logic [7:0]  rxq;
    logic [31:0] msg_id;
    logic [7:0]  msg_len;
    desc_t       desc;
  } cpl_t;

  // Event counters of the RX path.
  typedef struct packed {
    logic [31:0] filter_drop_cfg;    // discarded: app under reconfiguration
    logic [31:0] filter_drop_other;  // discarded: not a QNP frame
    logic [31:0] rsd_results;        // dispatch results computed by RSDs
    logic [31:0] rsd_default;        // ... of which took the default queue
    logic [31:0] rsd_lookups;        // skip-and-match CAM lookups
    logic [31:0] seg_saved;          // payload beats kept out of a BytePipe by seg_cnt
    logic [31:0] cache_hits;         // later packets dispatched from the cache
    logic [31:0] drop_nofirst;       // later packets discarded: first packet not seen
    logic [31:0] drop_engine;        // discarded: slot collision or no descriptor
    logic [31:0] pkts_delivered;     // packets DMAed to the host
    logic [31:0] msgs_complete;      // messages completed and notified
    logic [31:0] msgs_expired;       // messages reclaimed by the timeout
  } stats_t;

endpackage
