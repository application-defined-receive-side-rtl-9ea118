// rsd: one Receive Side Dispatch unit (BytePipe, Matcher, transient packet
// buffer), handling one packet at a time.
//
// Every beat of a packet goes into the transient packet buffer. For a packet
// that starts a message (sequence number 0) the payload beats are also
// written into the BytePipe and the Matcher is started on the header beat
// with the packet's app ID and message type. Only the first seg_cnt payload
// beats are written to the BytePipe (all of them when seg_cnt is 0), so the
// Matcher has fewer unused bytes to flush (the paper's seg_cnt optimisation).
// Buffered beats leave with the dispatch result as soon as it is known;
// packets that do not start a message leave at once with first = 0 and get
// their queue from the dispatch cache downstream. The next packet is taken
// only when the current one has fully left and the Matcher has flushed.
//
// The three parts and their roles follow the paper (Fig. 7). One packet in
// flight per RSD, the seg_cnt = 0 convention and payload beats being byte
// lanes 0..n-1 are this design's choices.
//
// Interface: in_* carries beats with the packet's metadata held constant
// over the packet; out_* carries rsd_out_t beats; cfg writes CAM, RAM and
// default-queue entries. Both streams are valid/ready.
module rsd #(
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
  // event pulses
  output logic               ev_result,
  output logic               ev_default,
  output logic               ev_lookup,
  output logic               ev_seg_saved
);
  import qn_pkg::*;
  localparam int unsigned LW = $clog2(NFIFO) + 1;
  localparam int unsigned AW = $clog2(CAM_ENTRIES);

  // configuration decode
  logic [7:0] defq;
  always_ff @(posedge clk) begin
    if (rst) defq <= '0;
    else if (cfg.valid && cfg.target == CFG_DEFQ) defq <= cfg.wdata[7:0];
  end

  // packet state
  typedef enum logic [0:0] {R_HEAD, R_BODY} rstate_e;
  rstate_e     st;
  pkt_meta_t   meta;
  logic        is_first, in_done, res_known, m_done;
  logic [7:0]  rxq;
  logic [7:0]  beat_no;
  logic [15:0] bp_bytes;

  // BytePipe and Matcher
  logic head, first_now, to_bp, seg_ok, accept;
  logic [7:0] seg_lim;
  logic [LW-1:0] keep_cnt;
  logic            bp_wr_valid, bp_wr_ready, bp_rd_valid, bp_rd_ready, win_ok, until_found;
  logic [LW-1:0]   bp_wr_len, bp_rd_len, win_cnt;
  logic [8*NFIFO-1:0] win;
  logic [LW-2:0]   until_pos;
  logic [$clog2(NFIFO*FIFO_DEPTH):0] bp_count;
  logic            m_start, m_idle, m_done_p, m_res, m_def, m_fix;
  logic [7:0]      m_q;
  logic [15:0]     start_bytes;

  byte_pipe #(.NFIFO(NFIFO), .DEPTH(FIFO_DEPTH)) u_bp (
    .clk, .rst,
    .wr_valid(bp_wr_valid), .wr_ready(bp_wr_ready), .wr_data(in_beat.data[8*NFIFO-1:0]), .wr_len(bp_wr_len),
    .rd_valid(bp_rd_valid), .rd_ready(bp_rd_ready), .rd_len(bp_rd_len),
    .win_ok, .win, .win_cnt, .until_found, .until_pos, .count(bp_count)
  );

  matcher #(.NFIFO(NFIFO), .CAM_ENTRIES(CAM_ENTRIES)) u_m (
    .clk, .rst,
    .cam_wr_en(cfg.valid && cfg.target == CFG_CAM), .cam_wr_addr(AW'(cfg.addr)),
    .cam_wr_entry(cam_entry_t'(cfg.wdata[95:0])), .cam_wr_valid(cfg.wdata[96]),
    .ram_wr_en(cfg.valid && cfg.target == CFG_RAM), .ram_wr_addr(AW'(cfg.addr)),
    .ram_wr_entry(ram_entry_t'(cfg.wdata[31:0])), .default_queue(defq),
    .start(m_start), .start_app(in_meta.app_id), .start_type(in_meta.msg_type),
    .start_bytes, .fix_valid(m_fix), .fix_bytes(bp_bytes + (to_bp ? 16'(bp_wr_len) : 16'd0)),
    .idle(m_idle), .done(m_done_p), .res_valid(m_res), .res_queue(m_q), .res_default(m_def),
    .lookup_pulse(ev_lookup),
    .bp_rd_valid, .bp_rd_ready, .bp_rd_len,
    .bp_win_ok(win_ok), .bp_win(win), .bp_win_cnt(win_cnt),
    .bp_until_found(until_found), .bp_until_pos(until_pos)
  );

  // transient packet buffer
  logic buf_in_valid, buf_in_ready, buf_out_valid, buf_out_ready;
  beat_t buf_out;
  logic [$clog2(BUF_DEPTH):0] buf_level;
  pkt_buffer #(.WIDTH($bits(beat_t)), .DEPTH(BUF_DEPTH)) u_buf (
    .clk, .rst,
    .in_valid(buf_in_valid), .in_ready(buf_in_ready), .in_data(in_beat),
    .out_valid(buf_out_valid), .out_ready(buf_out_ready), .out_data(buf_out),
    .level(buf_level)
  );

  // ---- input side ---------------------------------------------------------

  always_comb begin
    keep_cnt = '0;
    for (int b = 0; b < NFIFO; b++) keep_cnt += LW'(in_beat.keep[b]);
  end

  assign head      = (st == R_HEAD);
  assign first_now = head ? (in_meta.pkt_seq == 8'd0) : is_first;
  assign seg_lim   = in_meta.seg_cnt;
  assign seg_ok    = (seg_lim == 8'd0) || (beat_no <= seg_lim);
  assign to_bp     = !head && is_first && seg_ok;
  // a new packet waits for the matcher to be idle
  assign in_ready  = (head ? m_idle : !in_done) && buf_in_ready && (!to_bp || bp_wr_ready);
  assign accept    = in_valid && in_ready;
  assign buf_in_valid = in_valid && in_ready;
  assign bp_wr_valid  = accept && to_bp;
  assign bp_wr_len    = keep_cnt;
  assign m_start      = accept && head && first_now;
  assign m_fix        = accept && in_beat.last && first_now && !head;

  // bytes expected in the BytePipe: payload, cut to seg_cnt beats
  always_comb begin
    logic [15:0] cap;
    cap = 16'(in_meta.seg_cnt) * 16'(NFIFO);
    start_bytes = (in_meta.seg_cnt != 8'd0 && cap < in_meta.payload_len) ? cap : in_meta.payload_len;
    if (in_beat.last) start_bytes = 16'd0;      // header-only packet
  end

  // ---- output side --------------------------------------------------------
  assign out_valid     = buf_out_valid && res_known;
  assign buf_out_ready = out_ready && res_known;
  assign out.beat      = buf_out;
  assign out.meta      = meta;
  assign out.rxq       = rxq;
  assign out.first     = is_first;

  logic out_last;
  assign out_last = out_valid && out_ready && buf_out.last;

  always_ff @(posedge clk) begin
    if (rst) begin
      st        <= R_HEAD;
      is_first  <= 1'b0;
      in_done   <= 1'b0;
      res_known <= 1'b0;
      m_done    <= 1'b0;
      rxq       <= '0;
      beat_no   <= '0;
      bp_bytes  <= '0;
      meta      <= '0;
    end else begin
      if (m_res) begin
        res_known <= 1'b1;
        rxq       <= m_q;
      end
      if (m_done_p) m_done <= 1'b1;
      if (accept) begin
        beat_no <= beat_no + 8'd1;
        if (to_bp) bp_bytes <= bp_bytes + 16'(bp_wr_len);
        if (in_beat.last) in_done <= 1'b1;
      end
      if (accept && head) begin
        st        <= R_BODY;
        meta      <= in_meta;
        is_first  <= first_now;
        res_known <= !first_now;
        m_done    <= !first_now;
        beat_no   <= 8'd1;
        bp_bytes  <= '0;
        in_done   <= in_beat.last;
      end
      // packet finished: all in, all out (nothing written this cycle either),
      // matcher flushed
      if (st == R_BODY && (in_done || (accept && in_beat.last)) &&
          (m_done || m_done_p) && !buf_in_valid &&
          (buf_level == '0 || (buf_level == 1 && out_last))) begin
        st        <= R_HEAD;
        in_done   <= 1'b0;
        res_known <= 1'b0;
      end
    end
  end

  assign ev_result    = m_res;
  assign ev_default   = m_res && m_def;
  assign ev_seg_saved = accept && !head && is_first && !seg_ok;

  a_result_once: assert property (@(posedge clk) disable iff (rst) m_res |-> !res_known || !is_first);
endmodule
