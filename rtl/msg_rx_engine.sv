// msg_rx_engine: per-message receive state of the QingNiao NIC.
//
// ENTRIES message entries, each holding the message's host descriptor
// (16 B), a 24-bit timestamp of its last received packet and an 8-bit tracker
// of the packets received so far (bit n = packet n), as in the paper; the
// entry also keeps the message ID, RX queue and length in packets. Entries
// are direct mapped on the low bits of the message ID.
//
// Commands from the packet RX engine (one per cycle, answered next cycle):
//   PROBE  look up a message: found (slot holds it) and free (slot empty),
//          with its descriptor and queue
//   ALLOC  open an entry for a message whose first packet arrived
//   RECV   mark packet `seq` received and restart the timer; when all
//          msg_len packets are in, the host is notified (cpl, expired = 0)
//          and the entry freed
// A scanner visits one entry per idle cycle; an entry whose timer is older
// than TIMEOUT_TICKS is reclaimed and reported (cpl, expired = 1) so the host
// can free the message's memory. Completion and expiry also invalidate the
// message's dispatch-cache entry (inval_*).
//
// The state per entry, 512 entries and the 1 s timeout follow the paper. The
// timer counts ticks of TICK_DIV cycles so that 1 s at 250 MHz fits in 24
// bits (15 625 000 ticks of 16 cycles); that prescaler, direct mapping and
// the command set are this design's choices.
//
// cmd_ready is low while a notification waits on cpl_ready.
module msg_rx_engine #(
  parameter int unsigned ENTRIES       = 512,
  parameter int unsigned TICK_DIV      = 16,
  parameter int unsigned TIMEOUT_TICKS = 15_625_000
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               cmd_valid,
  output logic               cmd_ready,
  input  logic [1:0]         cmd_op,       // 0 PROBE, 1 ALLOC, 2 RECV
  input  logic [31:0]        cmd_msg_id,
  input  logic [7:0]         cmd_rxq,
  input  logic [7:0]         cmd_len,
  input  logic [7:0]         cmd_seq,
  input  qn_pkg::desc_t      cmd_desc,
  output logic               rsp_valid,
  output logic               rsp_found,
  output logic               rsp_free,
  output qn_pkg::desc_t      rsp_desc,
  output logic [7:0]         rsp_rxq,
  output logic               cpl_valid,
  input  logic               cpl_ready,
  output qn_pkg::cpl_t       cpl,
  output logic               inval_en,
  output logic [31:0]        inval_msg_id,
  output logic [$clog2(ENTRIES):0] active
);
  import qn_pkg::*;
  localparam int unsigned AW = $clog2(ENTRIES);
  localparam logic [1:0] OP_PROBE = 2'd0, OP_ALLOC = 2'd1, OP_RECV = 2'd2;

  typedef struct packed {
    logic        valid;
    logic [31:0] msg_id;
    logic [7:0]  rxq;
    logic [7:0]  msg_len;
    desc_t       desc;
    logic [23:0] timer;
    logic [7:0]  tracker;
  } msg_entry_t;

  msg_entry_t tbl [ENTRIES];

  // time base
  logic [$clog2(TICK_DIV+1)-1:0] pre;
  logic [23:0] now;
  always_ff @(posedge clk) begin
    if (rst) begin
      pre <= '0;
      now <= '0;
    end else if (32'(pre) == TICK_DIV - 1) begin
      pre <= '0;
      now <= now + 24'd1;
    end else begin
      pre <= pre + 1'b1;
    end
  end

  logic [AW-1:0] ci, si;
  msg_entry_t    ce, se;
  assign ci = cmd_msg_id[AW-1:0];
  assign ce = tbl[ci];
  assign se = tbl[si];

  logic cmd_fire, hit, scan_en, expired;
  logic [7:0] seqbit, full_mask, trk_n;
  assign cmd_ready = !cpl_valid;
  assign cmd_fire  = cmd_valid && cmd_ready;
  assign hit       = ce.valid && ce.msg_id == cmd_msg_id;
  assign seqbit    = (cmd_seq < 8'd8) ? (8'd1 << cmd_seq[2:0]) : 8'd0;
  assign trk_n     = ce.tracker | seqbit;
  assign full_mask = (ce.msg_len >= 8'd8) ? 8'hff : ((8'd1 << ce.msg_len[2:0]) - 8'd1);
  assign scan_en   = !cmd_fire && !cpl_valid;
  assign expired   = se.valid && 32'(now - se.timer) >= TIMEOUT_TICKS;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < ENTRIES; i++) tbl[i].valid <= 1'b0;
      si        <= '0;
      rsp_valid <= 1'b0;
      cpl_valid <= 1'b0;
      inval_en  <= 1'b0;
      active    <= '0;
    end else begin
      rsp_valid <= 1'b0;
      inval_en  <= 1'b0;
      if (cpl_valid && cpl_ready) cpl_valid <= 1'b0;
      if (cmd_fire) begin
        unique case (cmd_op)
          OP_PROBE: begin
            rsp_valid <= 1'b1;
            rsp_found <= hit;
            rsp_free  <= !ce.valid;
            rsp_desc  <= ce.desc;
            rsp_rxq   <= ce.rxq;
          end
          OP_ALLOC: begin
            tbl[ci] <= '{valid: 1'b1, msg_id: cmd_msg_id, rxq: cmd_rxq, msg_len: cmd_len,
                         desc: cmd_desc, timer: now, tracker: 8'd0};
            if (!ce.valid) active <= active + 1'b1;
          end
          OP_RECV: if (hit) begin
            tbl[ci].tracker <= trk_n;
            tbl[ci].timer   <= now;
            if ((trk_n & full_mask) == full_mask && ce.msg_len <= 8'd8) begin
              tbl[ci].valid <= 1'b0;
              active        <= active - 1'b1;
              cpl_valid     <= 1'b1;
              cpl           <= '{expired: 1'b0, rxq: ce.rxq, msg_id: ce.msg_id,
                                 msg_len: ce.msg_len, desc: ce.desc};
              inval_en      <= 1'b1;
              inval_msg_id  <= ce.msg_id;
            end
          end
          default: ;
        endcase
      end else if (scan_en) begin
        si <= si + 1'b1;
        if (expired) begin
          tbl[si].valid <= 1'b0;
          active        <= active - 1'b1;
          cpl_valid     <= 1'b1;
          cpl           <= '{expired: 1'b1, rxq: se.rxq, msg_id: se.msg_id,
                             msg_len: se.msg_len, desc: se.desc};
          inval_en      <= 1'b1;
          inval_msg_id  <= se.msg_id;
        end
      end
    end
  end

  a_op: assert property (@(posedge clk) disable iff (rst) cmd_valid |-> cmd_op != 2'd3);
endmodule
