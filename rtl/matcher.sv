// matcher: programmable skip-and-match engine of one RSD.
//
// A dispatch rule is a state machine whose states alternate between skipping
// bytes (entries of rule_ram) and matching strings (entries of rule_cam).
// For a packet that starts a message the matcher:
//   1. looks up the CAM with {app ID, message type, field 0, INIT_STATE} and
//      no inspected bytes; the hit index selects the rule's first RAM entry;
//   2. for each RAM entry {field, skip, inspect, state}: walks the TLV fields
//      (1-byte index, 1-byte length, value) in the BytePipe until it is inside
//      field `field`, skips `skip` bytes of its value (0xff: up to and
//      including the next '/'), inspects the next `inspect` bytes (at most 8)
//      and looks up the CAM with {app ID, message type, field, state, bytes};
//      the hit selects the next RAM entry and the skipped and inspected bytes
//      are consumed;
//   3. stops at a RAM entry that skips and inspects 0 bytes: its state field
//      is the RX queue. A CAM miss, a field that ends too early or a packet
//      that runs out of bytes gives the default queue;
//   4. reads out the rest of the packet's bytes from the BytePipe so that the
//      next packet starts clean, then pulses done.
// The RAM/CAM split, entry formats, 0xff SkipUntil code, terminating entry
// and default output follow the paper (Fig. 9). The initial CAM lookup, the
// SkipUntil consuming the '/', and matched bytes being consumed are this
// design's reading of the paper's Fig. 9 and Rule A examples.
//
// start_bytes is the expected byte count (from the UDP length); fix_valid
// replaces it with the count actually written once the packet's last beat is
// in, so a packet shorter than its header claims cannot stall the matcher.
//
// Timing: one skip-and-match takes 6 cycles when its bytes are already in the
// window: KEY (skip offset, inspected bytes), CAM (compare), RAM (read next
// entry), DECIDE (issue the BytePipe read), then the 2 remaining cycles of the
// 3-cycle read round. Walking to a new field costs one read round per TLV
// header and per 64 bytes skipped. The result pulse precedes the flush.
module matcher #(
  parameter int unsigned NFIFO       = 64,
  parameter int unsigned CAM_ENTRIES = 512
) (
  input  logic                       clk,
  input  logic                       rst,
  // rule configuration
  input  logic                       cam_wr_en,
  input  logic [$clog2(CAM_ENTRIES)-1:0] cam_wr_addr,
  input  qn_pkg::cam_entry_t         cam_wr_entry,
  input  logic                       cam_wr_valid,
  input  logic                       ram_wr_en,
  input  logic [$clog2(CAM_ENTRIES)-1:0] ram_wr_addr,
  input  qn_pkg::ram_entry_t         ram_wr_entry,
  input  logic [7:0]                 default_queue,
  // packet job
  input  logic                       start,
  input  logic [7:0]                 start_app,
  input  logic [7:0]                 start_type,
  input  logic [15:0]                start_bytes,   // bytes this packet puts in the BytePipe
  input  logic                       fix_valid,     // final byte count, once the packet is in
  input  logic [15:0]                fix_bytes,
  output logic                       idle,
  output logic                       done,          // pulse: packet's bytes all consumed
  output logic                       res_valid,     // pulse: dispatch result
  output logic [7:0]                 res_queue,
  output logic                       res_default,   // result came from the default path
  output logic                       lookup_pulse,  // one CAM lookup of a skip-and-match
  // BytePipe
  output logic                       bp_rd_valid,
  input  logic                       bp_rd_ready,
  output logic [$clog2(NFIFO):0]     bp_rd_len,
  input  logic                       bp_win_ok,
  input  logic [8*NFIFO-1:0]         bp_win,
  input  logic [$clog2(NFIFO):0]     bp_win_cnt,
  input  logic                       bp_until_found,
  input  logic [$clog2(NFIFO)-1:0]   bp_until_pos
);
  import qn_pkg::*;
  localparam int unsigned AW = $clog2(CAM_ENTRIES);
  localparam int unsigned LW = $clog2(NFIFO) + 1;

  typedef enum logic [2:0] {M_IDLE, M_KEY, M_CAM, M_RAM, M_DECIDE, M_SEEK, M_FLUSH} mstate_e;
  mstate_e st, st_n;

  logic [7:0]  app, mtype;
  logic [15:0] total, consumed;
  ram_entry_t  ent;
  logic        init;
  logic [7:0]  cur_field;
  logic        in_field;
  logic [15:0] field_rem;
  logic [LW-1:0] pend;
  cam_entry_t  key_q;
  logic [3:0]  len_q;

  // CAM and RAM
  logic          cam_hit;
  logic [AW-1:0] cam_idx;
  ram_entry_t    ram_q;
  logic          cam_lk, ram_rd;

  rule_cam #(.ENTRIES(CAM_ENTRIES)) u_cam (
    .clk, .rst,
    .wr_en(cam_wr_en), .wr_addr(cam_wr_addr), .wr_entry(cam_wr_entry), .wr_valid_bit(cam_wr_valid),
    .lk_en(cam_lk), .lk_key(key_q), .lk_len(len_q), .hit(cam_hit), .idx(cam_idx)
  );
  rule_ram #(.ENTRIES(CAM_ENTRIES)) u_ram (
    .clk,
    .wr_en(ram_wr_en), .wr_addr(ram_wr_addr), .wr_entry(ram_wr_entry),
    .rd_en(ram_rd), .rd_addr(cam_idx), .rd_entry(ram_q)
  );

  // ---- combinational decisions -------------------------------------------
  logic [15:0] win_cnt16, lim, off, need, left, n_take;
  logic [3:0]  n_insp;
  logic        more_coming, found;
  logic        miss, key_go, rd_do;
  logic [15:0] rd_n;
  logic [7:0]  tlv_idx, tlv_len;
  logic        take_tlv, skip_first, consume_field;
  logic [63:0] insp_bytes;

  always_comb begin
    win_cnt16   = 16'(bp_win_cnt);
    n_insp      = (ent.inspect > 8'd8) ? 4'd8 : ent.inspect[3:0];
    more_coming = (32'(consumed) + 32'(win_cnt16)) < 32'(total);
    lim         = (field_rem < 16'(NFIFO)) ? field_rem : 16'(NFIFO);
    found       = bp_until_found && (16'(bp_until_pos) < lim);
    off         = (ent.skip == SKIP_UNTIL) ? 16'(bp_until_pos) + 16'd1 : 16'(ent.skip);
    need        = off + 16'(n_insp);
    left        = total - consumed;
    insp_bytes  = 64'(bp_win >> (8 * int'(off[6:0])));
    tlv_idx     = bp_win[7:0];
    tlv_len     = bp_win[15:8];

    st_n          = st;
    miss          = 1'b0;
    key_go        = 1'b0;
    rd_do         = 1'b0;
    rd_n          = '0;
    take_tlv      = 1'b0;
    skip_first    = 1'b0;
    consume_field = 1'b0;
    n_take        = '0;
    cam_lk        = 1'b0;
    ram_rd        = 1'b0;

    unique case (st)
      M_IDLE: if (start) st_n = M_KEY;
      M_KEY: begin
        if (init) begin
          key_go = 1'b1;
        end else if (bp_win_ok) begin
          if (ent.skip == SKIP_UNTIL && !found) begin
            if (win_cnt16 < lim) begin
              if (!more_coming) miss = 1'b1;       // else wait for bytes
            end else if (field_rem > 16'(NFIFO)) begin
              rd_do = 1'b1; rd_n = 16'(NFIFO);     // no '/' in this window
              consume_field = 1'b1;
            end else begin
              miss = 1'b1;                         // field has no '/'
            end
          end else if (need > field_rem) begin
            miss = 1'b1;
          end else if (need > 16'(NFIFO)) begin
            rd_do = 1'b1; rd_n = off;              // skip first, inspect next round
            consume_field = 1'b1;
            skip_first = 1'b1;
          end else if (need > win_cnt16) begin
            if (!more_coming) miss = 1'b1;
          end else begin
            key_go = 1'b1;
          end
        end
        if (key_go)      st_n = M_CAM;
        else if (miss)   st_n = M_FLUSH;
      end
      M_CAM: begin
        cam_lk = 1'b1;
        st_n   = M_RAM;
      end
      M_RAM: begin
        if (cam_hit) begin
          ram_rd = 1'b1;
          st_n   = M_DECIDE;
        end else begin
          miss = 1'b1;
          st_n = M_FLUSH;
        end
      end
      M_DECIDE: begin
        if (pend != '0) begin
          rd_do = 1'b1; rd_n = 16'(pend);
          consume_field = 1'b1;
        end
        if (pend == '0 || bp_rd_ready) begin
          if (ram_q.skip == 8'd0 && ram_q.inspect == 8'd0) st_n = M_FLUSH;
          else if (in_field && cur_field == ram_q.field_idx) st_n = M_KEY;
          else st_n = M_SEEK;
        end
      end
      M_SEEK: begin
        if (in_field && cur_field == ent.field_idx) begin
          st_n = M_KEY;
        end else if (bp_win_ok) begin
          if (in_field && field_rem != 16'd0) begin
            n_take = (field_rem < win_cnt16) ? field_rem : win_cnt16;
            if (n_take != 16'd0) begin
              rd_do = 1'b1; rd_n = n_take; consume_field = 1'b1;
            end else if (!more_coming) begin
              miss = 1'b1; st_n = M_FLUSH;
            end
          end else if (32'(consumed) + 32'd2 > 32'(total)) begin
            miss = 1'b1; st_n = M_FLUSH;
          end else if (win_cnt16 >= 16'd2) begin
            rd_do = 1'b1; rd_n = 16'd2; take_tlv = 1'b1;
          end
        end
      end
      M_FLUSH: begin
        if (bp_win_ok) begin
          if (consumed >= total) begin
            st_n = M_IDLE;
          end else begin
            n_take = (left < win_cnt16) ? left : win_cnt16;
            if (n_take != 16'd0) begin
              rd_do = 1'b1; rd_n = n_take;
            end
          end
        end
      end
      default: st_n = M_IDLE;
    endcase
  end

  assign bp_rd_valid = rd_do;
  assign bp_rd_len   = LW'(rd_n);
  assign idle        = (st == M_IDLE);

  logic rd_fire;
  assign rd_fire = rd_do && bp_rd_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      st           <= M_IDLE;
      done         <= 1'b0;
      res_valid    <= 1'b0;
      res_queue    <= '0;
      res_default  <= 1'b0;
      lookup_pulse <= 1'b0;
      init         <= 1'b0;
      in_field     <= 1'b0;
      consumed     <= '0;
      total        <= '0;
      field_rem    <= '0;
      pend         <= '0;
    end else begin
      done         <= 1'b0;
      res_valid    <= 1'b0;
      lookup_pulse <= 1'b0;
      if (st == M_DECIDE && pend != '0 && !bp_rd_ready) begin
        st <= st;                                  // wait for the read slot
      end else begin
        st <= st_n;
      end

      if (rd_fire) consumed <= consumed + rd_n;
      if (fix_valid && st != M_IDLE) total <= fix_bytes;
      if (rd_fire && consume_field) field_rem <= field_rem - rd_n;

      unique case (st)
        M_IDLE: if (start) begin
          app      <= start_app;
          mtype    <= start_type;
          total    <= start_bytes;
          consumed <= '0;
          init     <= 1'b1;
          in_field <= 1'b0;
          pend     <= '0;
        end
        M_KEY: begin
          if (key_go) begin
            key_q.app_id    <= app;
            key_q.msg_type  <= mtype;
            key_q.field_idx <= init ? 8'd0 : ent.field_idx;
            key_q.state     <= init ? INIT_STATE : ent.state;
            key_q.data      <= init ? 64'd0 : insp_bytes;
            len_q           <= init ? 4'd0 : n_insp;
            pend            <= init ? '0 : LW'(need);
            lookup_pulse    <= !init;
          end
          if (rd_fire && skip_first) ent.skip <= 8'd0;
          if (miss) begin
            res_valid   <= 1'b1;
            res_queue   <= default_queue;
            res_default <= 1'b1;
          end
        end
        M_RAM: if (!cam_hit) begin
          res_valid   <= 1'b1;
          res_queue   <= default_queue;
          res_default <= 1'b1;
        end
        M_DECIDE: if (pend == '0 || bp_rd_ready) begin
          init <= 1'b0;
          pend <= '0;
          ent  <= ram_q;
          if (ram_q.skip == 8'd0 && ram_q.inspect == 8'd0) begin
            res_valid   <= 1'b1;
            res_queue   <= ram_q.state;
            res_default <= 1'b0;
          end
        end
        M_SEEK: begin
          if (rd_fire && take_tlv) begin
            cur_field <= tlv_idx;
            field_rem <= 16'(tlv_len);
            in_field  <= 1'b1;
          end
          if (miss) begin
            res_valid   <= 1'b1;
            res_queue   <= default_queue;
            res_default <= 1'b1;
          end
        end
        M_FLUSH: if (bp_win_ok && consumed >= total) done <= 1'b1;
        default: ;
      endcase
    end
  end

  a_read_fits: assert property (@(posedge clk) disable iff (rst)
    bp_rd_valid && bp_rd_ready |-> bp_rd_len <= bp_win_cnt);
endmodule
