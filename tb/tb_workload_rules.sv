// tb_workload_rules: the rule-table workloads of the evaluation, run on the
// receive path at its default sizes (no parameter overrides).
//   Phase 1: 96 rules of 5 skip-and-matches each (one SkipUntil '/' and four
//   Skip 1 steps, 5 matched bytes per step), as in the largest "number of
//   rules" point. Two shared entries (start, match "/") + 96 * 5 = 482 of
//   the 512 CAM/RAM entries. Rule r sends
//   to queue r mod 48 (48 key ranges). Random messages that follow one rule,
//   and messages that break off at a random step (default queue 200), must
//   complete on the right queue.
//   Phase 2: the application is marked for reconfiguration, its tables are
//   rewritten as a chain of up to 48 skip-and-matches (one byte each), and
//   the header-to-result latency is measured for 1, 2, 4, 8, 16, 32 and 48
//   steps, from the header beat entering the design to the result counter.
//   The cost per step must be exactly 6 cycles; the absolute numbers are
//   printed next to the reference's 9 + 6n.
// A behavioural host (descriptors, DMA memory, notifications) surrounds the
// design as in tb_qn_rx_top.
module tb_workload_rules;
  import qn_pkg::*;
  import qn_tb_pkg::*;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic [511:0] s_axis_tdata = '0;
  logic [63:0]  s_axis_tkeep = '0;
  logic s_axis_tlast = 0, s_axis_tvalid = 0, s_axis_tready;
  cfg_t cfg = '0;
  logic desc_req_valid, desc_req_ready = 1, desc_rsp_valid = 0, desc_rsp_ok = 1;
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

  qn_rx_top dut (.*);

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // host: one descriptor per fetch, notifications checked against expectations
  int ndesc = 0;
  logic [7:0] exp_q [int];
  int n_cpl = 0;
  always @(posedge clk) begin
    desc_rsp_valid <= 1'b0;
    if (!rst && desc_req_valid) begin
      desc_rsp_valid     <= 1'b1;
      desc_rsp_desc.addr <= 64'h2_0000_0000 + 64'(ndesc) * 64'h4000;
      ndesc++;
    end
    if (!rst && cpl_valid) begin
      int id;
      id = int'(cpl.msg_id);
      checks++;
      n_cpl++;
      if (cpl.expired || !exp_q.exists(id) || cpl.rxq != exp_q[id]) begin
        failures++;
        $display("FAIL: message %0d on queue %0d (expected %0d), expired %0d", id, cpl.rxq,
                 exp_q.exists(id) ? exp_q[id] : 0, cpl.expired);
      end
    end
  end

  task automatic cfgw(cfg_t c);
    @(negedge clk); cfg = c; @(negedge clk); cfg = '0;
  endtask

  int t_hdr;
  task automatic send(logic [7:0] app, logic [31:0] id, bytes_t p);
    beat_t beats[$];
    make_pkt(beats, app, 8'd1, id, 8'd1, 8'd0, 8'd0, p, 16'd9000);
    foreach (beats[i]) begin
      @(negedge clk);
      s_axis_tvalid = 1; s_axis_tdata = beats[i].data; s_axis_tkeep = beats[i].keep; s_axis_tlast = beats[i].last;
      @(posedge clk); #0;
      while (!s_axis_tready) begin @(posedge clk); #0; end
      if (i == 0) t_hdr = $time / 2;
    end
    @(negedge clk); s_axis_tvalid = 0;
  endtask

  // 5-byte string of rule r at step j, no '/' inside
  function automatic string rstr(int r, int j);
    string s;
    s = "";
    s = {s, 8'(8'h41 + 8'(j))};
    s = {s, 8'(8'h61 + 8'(r % 26))};
    s = {s, 8'(8'h61 + 8'(r / 26))};
    s = {s, 8'(8'h30 + 8'(j))};
    s = {s, "#"};
    return s;
  endfunction

  // field value following rule r; breaks off with a wrong string at step `brk`
  function automatic string rval(int r, int brk);
    string s;
    s = "/key/";
    for (int j = 0; j < 5; j++) begin
      if (j > 0) s = {s, "."};
      s = {s, (j == brk) ? "zzzzz" : rstr(r, j)};
    end
    return s;
  endfunction

  initial begin
    int e, c, lat1;
    int lat [int];
    int ns [7] = '{1, 2, 4, 8, 16, 32, 48};
    repeat (5) @(posedge clk);
    rst = 0;
    cfgw(cfg_simple(CFG_DEFQ, 0, 200));
    // ---- phase 1: 96 rules x 5 skip-and-matches --------------------------
    // field value "/key/<s0>.<s1>.<s2>.<s3>.<s4>": match "/", SkipUntil '/'
    // and match s0, then Skip 1 (the '.') and match s1..s4
    e = 0;
    cfgw(cfg_cam(e, 1, 1, 0, INIT_STATE, "")); cfgw(cfg_ram(e, 0, 0, 1, 1)); e++;   // match "/"
    cfgw(cfg_cam(e, 1, 1, 0, 1, "/"));         cfgw(cfg_ram(e, 0, SKIP_UNTIL, 5, 2)); e++;
    for (int r = 0; r < 96; r++) begin
      for (int j = 0; j < 5; j++) begin
        // step j is matched in state 2 + j; strings are unique per rule
        cfgw(cfg_cam(e, 1, 1, 0, 8'(2 + j), rstr(r, j)));
        if (j < 4) cfgw(cfg_ram(e, 0, 1, 5, 8'(3 + j)));
        else       cfgw(cfg_ram(e, 0, 0, 0, 8'(r % 48)));
        e++;
      end
    end
    $display("phase 1: %0d CAM/RAM entries used", e);
    checks++;
    if (e > 512) begin failures++; $display("FAIL: rules do not fit"); end
    for (int m = 0; m < 150; m++) begin
      int r, brk;
      bytes_t p;
      r = int'($urandom % 96);
      brk = ($urandom % 4 == 0) ? int'($urandom % 5) : -1;
      p = {}; tlv(p, 0, rval(r, brk));
      exp_q[m] = (brk < 0) ? 8'(r % 48) : 8'd200;
      send(1, m, p);
    end
    c = 0;
    while (n_cpl < 150 && c < 50000) begin @(posedge clk); c++; end
    checks++;
    if (n_cpl != 150) begin failures++; $display("FAIL: %0d of 150 messages completed", n_cpl); end

    // ---- phase 2: reconfigure to a chain of up to 48 steps ----------------
    cfgw(cfg_simple(CFG_DROP, 1, 1));
    for (int i = 0; i < 512; i++) cfgw('{valid: 1'b1, target: CFG_CAM, addr: 9'(i), wdata: '0});
    e = 0;
    cfgw(cfg_cam(e, 1, 1, 0, INIT_STATE, "")); cfgw(cfg_ram(e, 0, 1, 1, 10)); e++;
    for (int k = 0; k < 48; k++) begin
      // in state 10 + k: "y" ends the chain after k + 1 steps, "x" continues
      cfgw(cfg_cam(e, 1, 1, 0, 8'(10 + k), "y")); cfgw(cfg_ram(e, 0, 0, 0, 8'(100 + k + 1))); e++;
      cfgw(cfg_cam(e, 1, 1, 0, 8'(10 + k), "x")); cfgw(cfg_ram(e, 0, 1, 1, 8'(11 + k))); e++;
    end
    cfgw(cfg_simple(CFG_DROP, 1, 0));
    foreach (ns[i]) begin
      bytes_t p;
      string s;
      int n0;
      s = "";
      for (int j = 0; j < ns[i] - 1; j++) s = {s, "-x"};
      s = {s, "-y"};
      p = {}; tlv(p, 0, s);
      exp_q[1000 + i] = 8'(100 + ns[i]);
      n0 = int'(stats.rsd_results);
      send(1, 1000 + i, p);
      c = 0;
      while (int'(stats.rsd_results) == n0 && c < 5000) begin @(posedge clk); c++; end
      lat[ns[i]] = $time / 2 - t_hdr;
      repeat (100) @(posedge clk);
    end
    $display("skip-and-matches : cycles here (reference 9 + 6n)");
    foreach (ns[i]) $display("  %2d : %0d (%0d)", ns[i], lat[ns[i]], 9 + 6 * ns[i]);
    lat1 = lat[1];
    foreach (ns[i]) begin
      checks++;
      if (lat[ns[i]] - lat1 != 6 * (ns[i] - 1)) begin
        failures++; $display("FAIL: %0d steps took %0d cycles", ns[i], lat[ns[i]]);
      end
    end
    repeat (200) @(posedge clk);
    checks++;
    if (n_cpl != 157) begin failures++; $display("FAIL: %0d of 157 messages completed", n_cpl); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
