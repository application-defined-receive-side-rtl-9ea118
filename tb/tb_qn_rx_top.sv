// tb_qn_rx_top: end-to-end test of the QingNiao receive path with a short
// message timeout (TICK_DIV 4, TIMEOUT_TICKS 1500 = 6000 cycles) so that
// expiry can be seen. A behavioural host answers descriptor fetches (one
// buffer per fetch, address by queue), stores DMA writes in a byte memory
// and checks every notification: right queue and every payload byte at
// descriptor + seq * 1500. Traffic covers matching and default messages,
// 4 x 1500-byte messages, seg_cnt, a later packet without its first packet,
// a non-QNP frame, an application under reconfiguration, a message with a
// lost packet (reclaimed on expiry) and a burst over all RSDs. Every
// mechanism's count is printed and a mechanism that never happened fails.
module tb_qn_rx_top;

  import qn_pkg::*;
  import qn_tb_pkg::*;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic [511:0] s_axis_tdata = '0;
  logic [63:0]  s_axis_tkeep = '0;
  logic s_axis_tlast = 0, s_axis_tvalid = 0, s_axis_tready;
  cfg_t cfg = '0;
  logic desc_req_valid, desc_req_ready = 1, desc_rsp_valid = 0, desc_rsp_ok = 0;
  logic [7:0] desc_req_rxq;
  desc_t desc_rsp_desc = '0;
  logic dma_valid, dma_ready = 1;
  logic [63:0] dma_addr;
  logic [511:0] dma_data;
  logic [6:0] dma_len;
  logic cpl_valid, cpl_ready = 1;
  cpl_t cpl;
  stats_t stats;
  logic [3:0] rsd_busy;
  logic [9:0] msgs_active;

  qn_rx_top #(.TICK_DIV(4), .TIMEOUT_TICKS(1500)) dut (.*);

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- host model: queue manager, memory, completion queue -------------
  logic [7:0] mem [longint];
  int ndesc [int];
  int dq_left [int];          // descriptors left per queue (absent = plenty)
  int max_busy = 0;

  always @(posedge clk) begin
    desc_rsp_valid <= 1'b0;
    dma_ready      <= ($urandom % 5 != 0);
    cpl_ready      <= ($urandom % 4 != 0);
    if (!rst && $countones(rsd_busy) > max_busy) max_busy = $countones(rsd_busy);
    if (!rst && desc_req_valid && desc_req_ready) begin
      int q;
      q = int'(desc_req_rxq);
      if (!ndesc.exists(q)) ndesc[q] = 0;
      desc_rsp_valid     <= 1'b1;
      desc_rsp_ok        <= !(dq_left.exists(q) && dq_left[q] == 0);
      if (dq_left.exists(q) && dq_left[q] > 0) dq_left[q]--;
      desc_rsp_desc.addr <= 64'h1_0000_0000 + 64'(q) * 64'h100_0000 + 64'(ndesc[q]) * 64'h4000;
      desc_rsp_desc.len  <= 32'h4000;
      desc_rsp_desc.rsvd <= '0;
      ndesc[q]++;
    end
    if (!rst && dma_valid && dma_ready)
      for (int i = 0; i < int'(dma_len); i++) mem[longint'(dma_addr) + i] = dma_data[8*i +: 8];
  end

  typedef struct { logic [7:0] q; int len; bytes_t pl[8]; bit expect_expire; bit seen; } msg_t;
  msg_t msgs [int];
  int n_complete = 0, n_expired = 0, n_multi = 0;

  always @(posedge clk) if (!rst && cpl_valid && cpl_ready) begin
    int id;
    id = int'(cpl.msg_id);
    checks++;
    if (!msgs.exists(id) || msgs[id].seen) begin
      failures++; $display("FAIL: unexpected notification for message %0d", id);
    end else if (cpl.expired) begin
      n_expired++;
      msgs[id].seen = 1;
      if (!msgs[id].expect_expire) begin failures++; $display("FAIL: message %0d expired", id); end
    end else begin
      bit bad;
      bad = 0;
      msgs[id].seen = 1;
      n_complete++;
      if (msgs[id].len > 1) n_multi++;
      if (msgs[id].expect_expire) bad = 1;
      if (cpl.rxq != msgs[id].q || int'(cpl.msg_len) != msgs[id].len) bad = 1;
      for (int s = 0; s < msgs[id].len; s++)
        foreach (msgs[id].pl[s][j]) begin
          longint a;
          a = longint'(cpl.desc.addr) + longint'(s) * 1500 + j;
          if (!mem.exists(a) || mem[a] != msgs[id].pl[s][j]) bad = 1;
        end
      if (bad) begin
        failures++;
        $display("FAIL: message %0d completed with queue %0d (expected %0d) or wrong data", id, cpl.rxq, msgs[id].q);
      end
    end
  end

  // ---- stimulus ---------------------------------------------------------
  task automatic cfgw(cfg_t c);
    @(negedge clk); cfg = c; @(negedge clk); cfg = '0;
  endtask

  task automatic send_frame(beat_t beats[$]);
    foreach (beats[i]) begin
      @(negedge clk);
      s_axis_tvalid = 1; s_axis_tdata = beats[i].data; s_axis_tkeep = beats[i].keep; s_axis_tlast = beats[i].last;
      @(posedge clk); #0;
      while (!s_axis_tready) begin @(posedge clk); #0; end
    end
    @(negedge clk); s_axis_tvalid = 0;
  endtask

  task automatic send(logic [7:0] app, logic [31:0] id, int len, int seq, int seg, bytes_t p);
    beat_t beats[$];
    make_pkt(beats, app, 8'd1, id, 8'(len), 8'(seq), 8'(seg), p, 16'd9000);
    send_frame(beats);
  endtask

  function automatic bytes_t review(bit hit, int n);
    bytes_t b;
    tlv(b, 0, hit ? "/CA/20240919" : "/NY/20230101");
    tlv(b, 1, "/EE/Networks");
    for (int i = b.size(); i < n; i++) b.push_back(8'($urandom));
    return b;
  endfunction

  // message with `len` packets; packets in `skip` are never sent
  task automatic message(int id, bit hit, int len, int seg, int skip = -1, int size = 1500);
    msg_t m;
    m.q = hit ? 8'd5 : 8'd9;
    m.len = len;
    m.expect_expire = (skip >= 0);
    m.seen = 0;
    for (int s = 0; s < len; s++) begin
      bytes_t p;
      if (s == 0) p = review(hit, size);
      else for (int i = 0; i < size; i++) p.push_back(8'($urandom));
      m.pl[s] = p;
    end
    msgs[id] = m;
    for (int s = 0; s < len; s++) if (s != skip) send(1, id, len, s, s == 0 ? seg : 0, m.pl[s]);
  endtask

  task automatic wait_idle(int max_cycles);
    int c = 0;
    while (c < max_cycles) begin
      bit all;
      all = 1;
      foreach (msgs[id]) if (!msgs[id].seen && !(msgs[id].expect_expire && 0)) all = 0;
      if (all) break;
      @(posedge clk); c++;
    end
    repeat (50) @(posedge clk);
  endtask

  task automatic count(string what, int n, int lo);
    checks++;
    $display("  %-34s %0d", what, n);
    if (n < lo) begin failures++; $display("FAIL: %s happened %0d times", what, n); end
  endtask

  initial begin
    beat_t f[$];
    bytes_t p;
    repeat (5) @(posedge clk);
    rst = 0;
    // rule: student field "/<school>/2024..." -> queue 5, else default queue 9
    cfgw(cfg_simple(CFG_DEFQ, 0, 9));
    cfgw(cfg_cam(0, 1, 1, 0, INIT_STATE, "")); cfgw(cfg_ram(0, 0, 0, 1, 10));
    cfgw(cfg_cam(1, 1, 1, 0, 10, "/"));        cfgw(cfg_ram(1, 0, SKIP_UNTIL, 4, 11));
    cfgw(cfg_cam(2, 1, 1, 0, 11, "2024"));     cfgw(cfg_ram(2, 0, 0, 0, 5));

    // single-packet messages, matching and default
    for (int i = 0; i < 12; i++) message(100 + i, i % 3 != 0, 1, 0, -1, 64 + int'($urandom % 900));
    // multi-packet messages of 4 x 1500 bytes, one with seg_cnt = 2
    message(200, 1, 4, 0);
    message(201, 0, 4, 2);
    message(202, 1, 3, 1);
    // a later packet whose first packet was never seen
    p = {}; for (int i = 0; i < 100; i++) p.push_back(8'(i));
    send(1, 300, 2, 1, 0, p);
    // a frame that is not QNP (other UDP port)
    make_pkt(f, 1, 1, 301, 1, 0, 0, p, 16'd80);
    send_frame(f);
    // application 2 under reconfiguration: its packets are discarded
    cfgw(cfg_simple(CFG_DROP, 2, 1));
    send(2, 302, 1, 0, 0, p);
    cfgw(cfg_simple(CFG_DROP, 2, 0));
    // a message that never completes (packet 1 lost) -> reclaimed on expiry
    message(400, 1, 3, 0, 1, 300);
    // a burst of short messages to keep several RSDs busy
    for (int i = 0; i < 16; i++) message(500 + i, i % 2 == 1, 1 + i % 2, 0, -1, 128 + int'($urandom % 1000));
    wait_idle(40000);

    $display("mechanism counts:");
    count("filter: reconfiguration drops", int'(stats.filter_drop_cfg), 1);
    count("filter: non-QNP drops", int'(stats.filter_drop_other), 1);
    count("RSD: dispatch results", int'(stats.rsd_results), 1);
    count("RSD: default-queue results", int'(stats.rsd_default), 1);
    count("RSD: CAM lookups", int'(stats.rsd_lookups), 1);
    count("RSD: beats kept out by seg_cnt", int'(stats.seg_saved), 1);
    count("RSDs busy at once (max)", max_busy, 2);
    count("dispatch cache hits", int'(stats.cache_hits), 1);
    count("drops: first packet never seen", int'(stats.drop_nofirst), 1);
    count("packets delivered by DMA", int'(stats.pkts_delivered), 1);
    count("messages completed", n_complete, 1);
    count("multi-packet messages completed", n_multi, 1);
    count("messages expired", n_expired, 1);
    checks++;
    if (msgs_active != 0) begin failures++; $display("FAIL: %0d messages still open", msgs_active); end
    checks++;
    if (int'(stats.msgs_complete) != n_complete || n_complete != 31) begin
      failures++; $display("FAIL: %0d messages completed (host saw %0d), expected 31", stats.msgs_complete, n_complete);
    end
    checks++;
    if (int'(stats.rsd_results) != 32) begin failures++; $display("FAIL: %0d RSD results, expected 32", stats.rsd_results); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
