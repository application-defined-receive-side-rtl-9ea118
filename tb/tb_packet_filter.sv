// tb_packet_filter: self-checking test of the packet filter: QNP header
// fields parsed into metadata, payload length from the UDP length, frames
// to another UDP port discarded, frames of an application marked for
// reconfiguration discarded and passed again once unmarked, beat contents
// preserved, and random output back-pressure.
module tb_packet_filter;
  import qn_pkg::*;
  import qn_tb_pkg::*;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  cfg_t cfg = '0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1, ev_drop_cfg, ev_drop_other;
  beat_t in_beat = '0, out_beat;
  pkt_meta_t out_meta;

  packet_filter dut (.clk, .rst, .cfg, .in_valid, .in_ready, .in_beat,
    .out_valid, .out_ready, .out_beat, .out_meta, .ev_drop_cfg, .ev_drop_other);

  typedef struct { beat_t b; pkt_meta_t m; } exp_t;
  exp_t exp_q[$];
  int drops_cfg = 0, drops_other = 0;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst) begin
    if (ev_drop_cfg) drops_cfg++;
    if (ev_drop_other) drops_other++;
    out_ready <= ($urandom % 4) != 0;
    if (out_valid && out_ready) begin
      checks++;
      if (exp_q.size() == 0 || out_beat != exp_q[0].b || out_meta != exp_q[0].m) begin
        failures++;
        $display("FAIL beat/meta mismatch t=%0t", $time);
      end
      if (exp_q.size() != 0) void'(exp_q.pop_front());
    end
  end

  task automatic send(logic [7:0] app, logic [31:0] id, logic [7:0] seq, int plen, logic [15:0] port, bit pass);
    beat_t beats[$];
    bytes_t p;
    pkt_meta_t m;
    for (int i = 0; i < plen; i++) p.push_back(8'($urandom));
    make_pkt(beats, app, 8'd2, id, 8'd3, seq, 8'd1, p, port);
    m = '{app_id: app, msg_type: 8'd2, msg_id: id, msg_acked_id: 32'd0, msg_len: 8'd3,
          pkt_seq: seq, pkt_flag: 8'd0, seg_cnt: 8'd1, payload_len: 16'(plen)};
    foreach (beats[i]) begin
      if (pass) exp_q.push_back('{b: beats[i], m: m});
      @(negedge clk);
      in_valid = 1; in_beat = beats[i];
      @(posedge clk); #0;
      while (!in_ready) begin @(posedge clk); #0; end
      @(negedge clk);
      in_valid = 0;
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    send(1, 32'h01020304, 0, 100, 16'd9000, 1);
    send(1, 32'h01020304, 1, 0, 16'd9000, 1);
    send(2, 32'haabbccdd, 0, 200, 16'd80, 0);      // not QNP
    @(negedge clk); cfg = cfg_simple(CFG_DROP, 1, 1); @(negedge clk); cfg = '0;
    send(1, 5, 0, 64, 16'd9000, 0);                // app 1 under reconfiguration
    send(3, 6, 0, 64, 16'd9000, 1);                // others unaffected
    @(negedge clk); cfg = cfg_simple(CFG_DROP, 1, 0); @(negedge clk); cfg = '0;
    send(1, 7, 2, 130, 16'd9000, 1);
    for (int i = 0; i < 30; i++) send(8'($urandom % 4), $urandom, 8'($urandom % 4), int'($urandom % 300), 16'd9000, 1);
    repeat (20) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d beats missing", exp_q.size()); end
    checks++;
    if (drops_cfg != 1 || drops_other != 1) begin failures++; $display("FAIL drop counts %0d %0d", drops_cfg, drops_other); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
