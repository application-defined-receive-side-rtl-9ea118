// tb_rsd: self-checking test of one Receive Side Dispatch unit. Rules of the
// course-review example are loaded (rule A: student "/.*/2024.*" -> queue 5;
// rule B: student "/CA/.*" and course "/.*/Math" -> queue 7; default 9).
// First packets must leave with the matched queue, later packets with
// first = 0, every beat unchanged and in order. Also checks that seg_cnt
// keeps beats out of the BytePipe, a header-only first packet, and the
// header-to-result latency growing by 6 cycles per skip-and-match.
module tb_rsd;
  import qn_pkg::*;
  import qn_tb_pkg::*;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  cfg_t cfg = '0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  beat_t in_beat = '0;
  pkt_meta_t in_meta = '0;
  rsd_out_t out;
  logic ev_result, ev_default, ev_lookup, ev_seg_saved;

  rsd dut (.clk, .rst, .cfg, .in_valid, .in_ready, .in_beat, .in_meta,
    .out_valid, .out_ready, .out, .ev_result, .ev_default, .ev_lookup, .ev_seg_saved);

  typedef struct { beat_t b; logic [7:0] q; bit first; } exp_t;
  exp_t exp_q[$];
  int n_seg_saved = 0, n_default = 0;
  int t_head, lat;
  bit rand_ready = 0;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst) begin
    if (ev_seg_saved) n_seg_saved++;
    if (ev_default) n_default++;
    if (ev_result) lat = $time / 2 - t_head;
    if (out_valid && out_ready) begin
      checks++;
      if (exp_q.size() == 0 || out.beat != exp_q[0].b || out.first != exp_q[0].first ||
          (exp_q[0].first && out.rxq != exp_q[0].q)) begin
        failures++;
        $display("FAIL output beat: queue %0d first %0d, expected %0d %0d", out.rxq, out.first,
                 exp_q.size() ? exp_q[0].q : 0, exp_q.size() ? exp_q[0].first : 0);
      end
      if (exp_q.size() != 0) void'(exp_q.pop_front());
    end
    out_ready <= rand_ready ? ($urandom % 3 != 0) : 1'b1;
  end

  task automatic cfgw(cfg_t c);
    @(negedge clk); cfg = c; @(negedge clk); cfg = '0;
  endtask

  task automatic send(logic [7:0] app, logic [7:0] typ, logic [31:0] id, logic [7:0] seq,
                      logic [7:0] seg, bytes_t p, logic [7:0] q);
    beat_t beats[$];
    make_pkt(beats, app, typ, id, 8'd2, seq, seg, p, 16'd9000);
    foreach (beats[i]) begin
      exp_q.push_back('{b: beats[i], q: q, first: seq == 0});
      @(negedge clk);
      in_valid = 1; in_beat = beats[i];
      in_meta = '{app_id: app, msg_type: typ, msg_id: id, msg_acked_id: 0, msg_len: 2, pkt_seq: seq,
                  pkt_flag: 0, seg_cnt: seg, payload_len: 16'(p.size())};
      @(posedge clk); #0;
      while (!in_ready) begin @(posedge clk); #0; end
      if (i == 0) t_head = $time / 2;
      @(negedge clk);
      in_valid = 0;
    end
  endtask

  task automatic drain();
    int c = 0;
    while (exp_q.size() != 0 && c < 5000) begin @(posedge clk); c++; end
    repeat (10) @(posedge clk);
  endtask

  bytes_t p;
  int lat_k[5];

  function automatic bytes_t msg(string student, string course, int review_len);
    bytes_t b;
    tlv(b, 0, student); tlv(b, 1, course);
    b.push_back(8'd2); b.push_back(8'(review_len > 255 ? 255 : review_len));
    for (int i = 0; i < review_len; i++) b.push_back(8'h61 + 8'(i % 26));
    return b;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    cfgw(cfg_simple(CFG_DEFQ, 0, 9));
    // rule A (app 1, type 1)
    cfgw(cfg_cam(0, 1, 1, 0, INIT_STATE, "")); cfgw(cfg_ram(0, 0, 0, 1, 10));
    cfgw(cfg_cam(1, 1, 1, 0, 10, "/"));        cfgw(cfg_ram(1, 0, SKIP_UNTIL, 4, 11));
    cfgw(cfg_cam(2, 1, 1, 0, 11, "2024"));     cfgw(cfg_ram(2, 0, 0, 0, 5));
    // rule B (app 1, type 2)
    cfgw(cfg_cam(3, 1, 2, 0, INIT_STATE, "")); cfgw(cfg_ram(3, 0, 0, 4, 20));
    cfgw(cfg_cam(4, 1, 2, 0, 20, "/CA/"));     cfgw(cfg_ram(4, 1, 0, 1, 21));
    cfgw(cfg_cam(5, 1, 2, 1, 21, "/"));        cfgw(cfg_ram(5, 1, SKIP_UNTIL, 4, 22));
    cfgw(cfg_cam(6, 1, 2, 1, 22, "Math"));     cfgw(cfg_ram(6, 0, 0, 0, 7));
    // chain (app 2): k skip-and-matches "x" then exit on "y", queue 40+k
    cfgw(cfg_cam(10, 2, 1, 0, INIT_STATE, "")); cfgw(cfg_ram(10, 0, 1, 1, 30));
    for (int k = 0; k < 4; k++) begin
      cfgw(cfg_cam(11 + k, 2, 1, 0, 8'(30 + k), "x")); cfgw(cfg_ram(11 + k, 0, 1, 1, 8'(31 + k)));
      cfgw(cfg_cam(21 + k, 2, 1, 0, 8'(31 + k), "y")); cfgw(cfg_ram(21 + k, 0, 0, 0, 8'(41 + k)));
    end

    send(1, 1, 100, 0, 0, msg("/CA/20240919", "/EE/Net", 40), 5);
    send(1, 1, 100, 1, 0, msg("ignored", "x", 300), 0);
    send(1, 1, 101, 0, 0, msg("/PA/202345", "/EE/Net", 10), 9);
    send(1, 2, 102, 0, 0, msg("/CA/1999", "/CS/Math", 500), 7);
    send(1, 2, 103, 0, 1, msg("/CA/1999", "/CS/Math", 250), 7);   // seg_cnt = 1
    send(1, 2, 104, 0, 0, msg("/CA/1999", "/CS/Phys", 5), 9);
    p = {}; send(1, 1, 105, 0, 0, p, 9);                           // header only
    drain();
    checks++;
    if (n_seg_saved == 0) begin failures++; $display("FAIL: seg_cnt never limited the BytePipe"); end
    checks++;
    if (n_default != 3) begin failures++; $display("FAIL: %0d default results, expected 3", n_default); end
    // latency per skip-and-match
    for (int k = 1; k <= 4; k++) begin
      string s;
      s = "";
      for (int i = 0; i < k; i++) s = {s, "-x"};
      s = {s, "-y"};
      p = {}; tlv(p, 0, s);
      send(2, 1, 200 + k, 0, 0, p, 8'(40 + k));
      drain();
      lat_k[k] = lat;
    end
    $display("header-to-result cycles for 2..5 skip-and-matches: %0d %0d %0d %0d", lat_k[1], lat_k[2], lat_k[3], lat_k[4]);
    for (int k = 2; k <= 4; k++) begin
      checks++;
      if (lat_k[k] - lat_k[k-1] != 6) begin failures++; $display("FAIL: %0d cycles per skip-and-match", lat_k[k] - lat_k[k-1]); end
    end
    // random back-pressure
    rand_ready = 1;
    for (int i = 0; i < 20; i++) begin
      send(1, 1, 300 + i, 0, 0, msg((i % 2) ? "/NY/2024" : "/NY/2023", "/a/b", int'($urandom % 400)), (i % 2) ? 5 : 9);
      send(1, 1, 300 + i, 1, 0, msg("z", "z", int'($urandom % 400)), 0);
    end
    drain();
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d beats never left", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
