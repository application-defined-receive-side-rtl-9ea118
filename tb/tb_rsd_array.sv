// tb_rsd_array: self-checking test of the parallel RSD array. A stream of
// first and later packets of many messages is sent back to back. Each
// message's packets must leave in order, beats unchanged, packets never
// interleaved, first packets carrying the rule's queue. Also checks that
// several RSDs work at the same time and that every message ID is handled
// by the RSD msg_id mod N_RSD.
module tb_rsd_array;
  import qn_pkg::*;
  import qn_tb_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  cfg_t cfg = '0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  beat_t in_beat = '0;
  pkt_meta_t in_meta = '0;
  rsd_out_t out;
  logic ev_result, ev_default, ev_lookup, ev_seg_saved;
  logic [N-1:0] busy;

  rsd_array #(.N_RSD(N)) dut (.clk, .rst, .cfg, .in_valid, .in_ready, .in_beat, .in_meta,
    .out_valid, .out_ready, .out, .ev_result, .ev_default, .ev_lookup, .ev_seg_saved, .busy);

  typedef struct { beat_t b; logic [7:0] q; bit first; } exp_t;
  exp_t exp_q [int][$];
  int pending = 0, max_busy = 0, cur_id = -1, n_results = 0;
  bit in_pkt = 0;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst) begin
    int nb;
    nb = $countones(busy);
    if (nb > max_busy) max_busy = nb;
    if (ev_result) n_results++;
    if (out_valid && out_ready) begin
      int id;
      id = int'(out.meta.msg_id);
      checks++;
      if (in_pkt && id != cur_id) begin failures++; $display("FAIL: packets interleaved (%0d inside %0d)", id, cur_id); end
      if (!exp_q.exists(id) || exp_q[id].size() == 0) begin
        failures++; $display("FAIL: unexpected beat of message %0d", id);
      end else begin
        if (out.beat != exp_q[id][0].b || out.first != exp_q[id][0].first ||
            (out.first && out.rxq != exp_q[id][0].q)) begin
          failures++;
          $display("FAIL: message %0d beat mismatch (q %0d first %0d)", id, out.rxq, out.first);
        end
        void'(exp_q[id].pop_front());
        pending--;
      end
      cur_id = id;
      in_pkt = !out.beat.last;
    end
    out_ready <= ($urandom % 4 != 0);
  end

  // input monitor: which RSD takes each packet
  logic [N-1:0] uv;
  for (genvar g = 0; g < N; g++) begin : g_mon
    assign uv[g] = dut.g_rsd[g].u_rsd.in_valid;
  end
  always @(posedge clk) if (!rst && in_valid && in_ready) begin
    int s;
    s = -1;
    for (int i = 0; i < N; i++) if (uv[i]) s = i;
    checks++;
    if (s != int'(in_meta.msg_id % N)) begin failures++; $display("FAIL: message %0d sent to RSD %0d", in_meta.msg_id, s); end
  end

  task automatic cfgw(cfg_t c);
    @(negedge clk); cfg = c; @(negedge clk); cfg = '0;
  endtask

  task automatic send(int id, logic [7:0] seq, bytes_t p, logic [7:0] q);
    beat_t beats[$];
    make_pkt(beats, 1, 1, id, 8'd2, seq, 0, p, 16'd9000);
    foreach (beats[i]) begin
      exp_q[id].push_back('{b: beats[i], q: q, first: seq == 0});
      pending++;
      @(negedge clk);
      in_valid = 1; in_beat = beats[i];
      in_meta = '{app_id: 1, msg_type: 1, msg_id: id, msg_acked_id: 0, msg_len: 2, pkt_seq: seq,
                  pkt_flag: 0, seg_cnt: 0, payload_len: 16'(p.size())};
      @(posedge clk); #0;
      while (!in_ready) begin @(posedge clk); #0; end
    end
    @(negedge clk); in_valid = 0;
  endtask

  initial begin
    bytes_t p;
    int c;
    repeat (3) @(posedge clk);
    rst = 0;
    cfgw(cfg_simple(CFG_DEFQ, 0, 9));
    // field 0 "/<anything>/2024..." -> 5
    cfgw(cfg_cam(0, 1, 1, 0, INIT_STATE, "")); cfgw(cfg_ram(0, 0, 0, 1, 10));
    cfgw(cfg_cam(1, 1, 1, 0, 10, "/"));        cfgw(cfg_ram(1, 0, SKIP_UNTIL, 4, 11));
    cfgw(cfg_cam(2, 1, 1, 0, 11, "2024"));     cfgw(cfg_ram(2, 0, 0, 0, 5));
    for (int m = 0; m < 40; m++) begin
      bit hit;
      hit = ($urandom % 2) == 1;
      p = {}; tlv(p, 0, hit ? "/CA/2024x" : "/CA/2023x");
      for (int i = 0; i < int'($urandom % 300); i++) p.push_back(8'($urandom));
      send(1000 + m, 0, p, hit ? 5 : 9);
      if (m % 3 == 0) begin
        p = {}; for (int i = 0; i < 1 + int'($urandom % 200); i++) p.push_back(8'($urandom));
        send(1000 + m, 1, p, 0);
      end
    end
    c = 0;
    while (pending != 0 && c < 20000) begin @(posedge clk); c++; end
    checks++;
    if (pending != 0) begin failures++; $display("FAIL: %0d beats never left", pending); end
    checks++;
    if (max_busy < 2) begin failures++; $display("FAIL: RSDs never worked in parallel"); end
    checks++;
    if (n_results != 40) begin failures++; $display("FAIL: %0d results for 40 first packets", n_results); end
    $display("max RSDs busy at once: %0d", max_busy);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
