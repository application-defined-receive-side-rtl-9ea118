// tb_pkt_rx_engine: self-checking test of the packet RX engine, connected to
// the real dispatch_cache and msg_rx_engine (long timeout). The testbench
// drives rsd_out_t packets directly and acts as queue manager and DMA
// target. Every DMA beat's address, byte count and data are checked against
// descriptor + seq * 1500 + 64 * (beat - 1). Cases: first packet (descriptor
// fetched from the RSD's queue), later packets (queue from the cache), a
// repeated first packet (descriptor reused, no second fetch), a later packet
// with no first packet, a queue with no descriptor and a message-table slot
// collision (both discarded), and completion notification.
module tb_pkt_rx_engine;
  import qn_pkg::*;
  import qn_tb_pkg::*;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_ready;
  rsd_out_t in = '0;
  logic desc_req_valid, desc_req_ready = 1, desc_rsp_valid = 0, desc_rsp_ok = 0;
  logic [7:0] desc_req_rxq;
  desc_t desc_rsp_desc = '0;
  logic dma_valid, dma_ready = 1;
  logic [63:0] dma_addr;
  logic [511:0] dma_data;
  logic [6:0] dma_len;
  logic msg_cmd_valid, msg_cmd_ready, msg_rsp_valid, msg_rsp_found, msg_rsp_free;
  logic [1:0] msg_cmd_op;
  logic [31:0] msg_cmd_msg_id;
  logic [7:0] msg_cmd_rxq, msg_cmd_len, msg_cmd_seq, msg_rsp_rxq;
  desc_t msg_cmd_desc, msg_rsp_desc;
  logic cache_fill_en, cache_lk_en, cache_rsp_valid, cache_rsp_hit;
  logic [31:0] cache_fill_msg_id, cache_lk_msg_id;
  logic [7:0] cache_fill_rxq, cache_rsp_rxq;
  logic ev_cache_hit, ev_drop_nofirst, ev_drop_other, ev_pkt_done;
  logic cpl_valid, cpl_ready = 1, inval_en;
  cpl_t cpl;
  logic [31:0] inval_msg_id;
  logic [9:0] active;

  pkt_rx_engine dut (.*);
  msg_rx_engine #(.TIMEOUT_TICKS(1_000_000)) u_msg (.clk, .rst,
    .cmd_valid(msg_cmd_valid), .cmd_ready(msg_cmd_ready), .cmd_op(msg_cmd_op), .cmd_msg_id(msg_cmd_msg_id),
    .cmd_rxq(msg_cmd_rxq), .cmd_len(msg_cmd_len), .cmd_seq(msg_cmd_seq), .cmd_desc(msg_cmd_desc),
    .rsp_valid(msg_rsp_valid), .rsp_found(msg_rsp_found), .rsp_free(msg_rsp_free), .rsp_desc(msg_rsp_desc),
    .rsp_rxq(msg_rsp_rxq), .cpl_valid, .cpl_ready, .cpl, .inval_en, .inval_msg_id, .active);
  dispatch_cache u_cache (.clk, .rst, .fill_en(cache_fill_en), .fill_msg_id(cache_fill_msg_id),
    .fill_rxq(cache_fill_rxq), .inval_en, .inval_msg_id, .lk_en(cache_lk_en), .lk_msg_id(cache_lk_msg_id),
    .rsp_valid(cache_rsp_valid), .rsp_hit(cache_rsp_hit), .rsp_rxq(cache_rsp_rxq));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected DMA beats
  typedef struct { logic [63:0] addr; logic [511:0] data; logic [6:0] len; } dma_t;
  dma_t dq[$];
  int n_fetch = 0, n_hit = 0, n_nofirst = 0, n_other = 0, n_done = 0, n_cpl = 0;
  int no_desc_q = 33;
  logic [31:0] cpl_ids[$];

  always @(posedge clk) begin
    desc_rsp_valid <= 1'b0;
    dma_ready <= ($urandom % 3 != 0);
    if (!rst) begin
      if (desc_req_valid && desc_req_ready) begin
        n_fetch++;
        desc_rsp_valid <= 1'b1;
        desc_rsp_ok    <= (desc_req_rxq != 8'(no_desc_q));
        desc_rsp_desc  <= '{rsvd: 0, len: 32'h4000, addr: 64'h8000_0000 + 64'(desc_req_rxq) * 64'h10_0000};
      end
      if (dma_valid && dma_ready) begin
        checks++;
        if (dq.size() == 0 || dma_addr != dq[0].addr || dma_len != dq[0].len || dma_data != dq[0].data) begin
          failures++;
          $display("FAIL: DMA addr %h len %0d (expected %h %0d)", dma_addr, dma_len,
                   dq.size() ? dq[0].addr : 0, dq.size() ? dq[0].len : 0);
        end
        if (dq.size()) void'(dq.pop_front());
      end
      if (ev_cache_hit) n_hit++;
      if (ev_drop_nofirst) n_nofirst++;
      if (ev_drop_other) n_other++;
      if (ev_pkt_done) n_done++;
      if (cpl_valid && cpl_ready) begin n_cpl++; cpl_ids.push_back(cpl.msg_id); end
    end
  end

  // send one packet; `deliver` says whether its payload must be DMAed
  task automatic pkt(logic [31:0] id, int len, int seq, bit first, logic [7:0] q, int size, bit deliver);
    beat_t beats[$];
    bytes_t p;
    for (int i = 0; i < size; i++) p.push_back(8'($urandom));
    make_pkt(beats, 1, 1, id, 8'(len), 8'(seq), 0, p, 16'd9000);
    foreach (beats[i]) begin
      if (deliver && i > 0)
        dq.push_back('{addr: 64'h8000_0000 + 64'(q) * 64'h10_0000 + 64'(seq * 1500 + 64 * (i - 1)),
                       data: beats[i].data, len: 7'($countones(beats[i].keep))});
      @(negedge clk);
      in_valid = 1;
      in.beat = beats[i];
      in.first = first;
      in.rxq = first ? q : 8'd0;
      in.meta = '{app_id: 1, msg_type: 1, msg_id: id, msg_acked_id: 0, msg_len: 8'(len), pkt_seq: 8'(seq),
                  pkt_flag: 0, seg_cnt: 0, payload_len: 16'(size)};
      @(posedge clk); #0;
      while (!in_ready) begin @(posedge clk); #0; end
    end
    @(negedge clk); in_valid = 0;
  endtask

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL: %s = %0d, expected %0d", what, got, exp); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    repeat (3) @(posedge clk);
    // three-packet message to queue 4, packets out of order, first repeated
    pkt(10, 3, 0, 1, 4, 1500, 1);
    pkt(10, 3, 2, 0, 4, 700, 1);
    pkt(10, 3, 0, 1, 4, 1500, 1);      // retransmitted first packet
    pkt(10, 3, 1, 0, 4, 1500, 1);
    // later packet with no first packet
    pkt(11, 2, 1, 0, 0, 200, 0);
    // first packet to a queue without descriptors
    pkt(12, 1, 0, 1, 8'(no_desc_q), 200, 0);
    // message 20 open, message 20 + 512 collides with its slot
    pkt(20, 2, 0, 1, 6, 100, 1);
    pkt(20 + 512, 1, 0, 1, 7, 100, 0);
    pkt(20, 2, 1, 0, 6, 64, 1);
    // header-only packet message
    pkt(30, 1, 0, 1, 3, 0, 1);
    repeat (200) @(posedge clk);
    expect_eq("descriptor fetches", n_fetch, 4);
    expect_eq("cache hits", n_hit, 3);
    expect_eq("drops without first packet", n_nofirst, 1);
    expect_eq("other drops", n_other, 2);
    expect_eq("packets delivered", n_done, 7);
    expect_eq("DMA beats left over", dq.size(), 0);
    expect_eq("completions", n_cpl, 3);
    if (n_cpl == 3) begin
      expect_eq("completion 0", int'(cpl_ids[0]), 10);
      expect_eq("completion 1", int'(cpl_ids[1]), 20);
      expect_eq("completion 2", int'(cpl_ids[2]), 30);
    end
    expect_eq("open messages", int'(active), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
