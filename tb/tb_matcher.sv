// tb_matcher: self-checking test of the skip-and-match engine together with
// a BytePipe. It loads rules into the CAM/RAM, writes TLV payloads into the
// BytePipe, starts the matcher and checks the RX queue it reports, that the
// BytePipe is empty afterwards, and the 6-cycle cost of each skip-and-match.
// Rules: the ".*/AAA.BB -> queue 2" example (Fig. 9 tables), the
// "/.*/2024.*" rule A and the two-field rule B of the course-review example.
module tb_matcher;
  import qn_pkg::*;

  logic clk = 0, rst = 1;
  always #1 clk = ~clk;

  int checks = 0, failures = 0;

  // configuration
  logic          cam_wr_en = 0, cam_wr_valid = 0, ram_wr_en = 0;
  logic [8:0]    cam_wr_addr = 0, ram_wr_addr = 0;
  cam_entry_t    cam_wr_entry;
  ram_entry_t    ram_wr_entry;
  logic [7:0]    defq = 8'd9;
  // job
  logic          start = 0;
  logic [7:0]    s_app = 0, s_type = 0;
  logic [15:0]   s_bytes = 0;
  logic          idle, done, res_valid, res_default, lookup_pulse;
  logic [7:0]    res_queue;
  // byte pipe
  logic          wr_valid = 0, wr_ready;
  logic [511:0]  wr_data = '0;
  logic [6:0]    wr_len = 0;
  logic          rd_valid, rd_ready, win_ok, until_found;
  logic [6:0]    rd_len, win_cnt;
  logic [511:0]  win;
  logic [5:0]    until_pos;
  logic [13:0]   count;

  byte_pipe u_bp (.clk, .rst, .wr_valid, .wr_ready, .wr_data, .wr_len,
    .rd_valid, .rd_ready, .rd_len, .win_ok, .win, .win_cnt, .until_found, .until_pos, .count);

  matcher dut (.clk, .rst,
    .cam_wr_en, .cam_wr_addr, .cam_wr_entry, .cam_wr_valid,
    .ram_wr_en, .ram_wr_addr, .ram_wr_entry, .default_queue(defq),
    .start, .start_app(s_app), .start_type(s_type), .start_bytes(s_bytes), .fix_valid(1'b0), .fix_bytes(16'd0),
    .idle, .done, .res_valid, .res_queue, .res_default, .lookup_pulse,
    .bp_rd_valid(rd_valid), .bp_rd_ready(rd_ready), .bp_rd_len(rd_len),
    .bp_win_ok(win_ok), .bp_win(win), .bp_win_cnt(win_cnt),
    .bp_until_found(until_found), .bp_until_pos(until_pos));

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] str8(string s);
    logic [63:0] d = '0;
    for (int i = 0; i < s.len() && i < 8; i++) d[8*i +: 8] = s[i];
    return d;
  endfunction

  task automatic cam_w(int a, logic [7:0] app, logic [7:0] typ, logic [7:0] fld, logic [7:0] stt, string s);
    @(negedge clk);
    cam_wr_en = 1; cam_wr_addr = 9'(a); cam_wr_valid = 1;
    cam_wr_entry = '{app_id: app, msg_type: typ, field_idx: fld, state: stt, data: str8(s)};
    @(negedge clk);
    cam_wr_en = 0;
  endtask

  task automatic ram_w(int a, logic [7:0] fld, logic [7:0] skp, logic [7:0] ins, logic [7:0] stt);
    @(negedge clk);
    ram_wr_en = 1; ram_wr_addr = 9'(a);
    ram_wr_entry = '{field_idx: fld, skip: skp, inspect: ins, state: stt};
    @(negedge clk);
    ram_wr_en = 0;
  endtask

  // Write bytes into the BytePipe, 64 per round.
  task automatic push(byte unsigned b[$]);
    int i = 0;
    while (i < b.size()) begin
      int n = (b.size() - i > 64) ? 64 : b.size() - i;
      @(negedge clk);
      wr_data = '0;
      for (int k = 0; k < n; k++) wr_data[8*k +: 8] = b[i + k];
      wr_len = 7'(n);
      wr_valid = 1;
      @(posedge clk);
      while (!wr_ready) @(posedge clk);
      @(negedge clk);
      wr_valid = 0;
      i += n;
    end
    repeat (4) @(posedge clk);
  endtask

  function automatic void tlv(ref byte unsigned b[$], input int idx, input string s);
    b.push_back(8'(idx));
    b.push_back(8'(s.len()));
    for (int i = 0; i < s.len(); i++) b.push_back(s[i]);
  endfunction

  // Run one packet; returns queue and start-to-result cycles.
  task automatic run(byte unsigned b[$], logic [7:0] app, logic [7:0] typ,
                     output logic [7:0] q, output int lat, output int lk);
    int c = 0;
    lk = 0;
    push(b);
    @(negedge clk);
    s_app = app; s_type = typ; s_bytes = 16'(b.size()); start = 1;
    @(posedge clk);
    @(negedge clk);
    start = 0;
    c = 1;
    while (!res_valid) begin
      @(posedge clk); #0;
      if (lookup_pulse) lk++;
      c++;
      @(negedge clk);
    end
    q = res_queue;
    lat = c;
    while (!idle) @(posedge clk);
    repeat (4) @(posedge clk);
  endtask

  task automatic expect_q(string name, byte unsigned b[$], logic [7:0] app, logic [7:0] typ, logic [7:0] exp_q);
    logic [7:0] q; int lat, lk;
    run(b, app, typ, q, lat, lk);
    checks++;
    if (q !== exp_q) begin
      failures++;
      $display("FAIL %s: queue %0d expected %0d", name, q, exp_q);
    end
    checks++;
    if (count != 0) begin
      failures++;
      $display("FAIL %s: %0d bytes left in BytePipe", name, count);
    end
  endtask

  byte unsigned p[$];
  int lat_k[9];
  logic [7:0] q;
  int lk, e;

  initial begin
    repeat (4) @(posedge clk);
    rst = 0;
    // Fig. 9: .*/AAA.BB -> 2  (app 1, type 1)
    cam_w(0, 1, 1, 0, INIT_STATE, "");   ram_w(0, 0, SKIP_UNTIL, 3, 0);
    cam_w(1, 1, 1, 0, 0, "AAA");         ram_w(1, 0, 1, 2, 1);
    cam_w(2, 1, 1, 0, 1, "BB");          ram_w(2, 0, 0, 0, 2);
    // Rule A: /.*/2024.* -> 5  (app 1, type 2)
    cam_w(3, 1, 2, 0, INIT_STATE, "");   ram_w(3, 0, 0, 1, 10);
    cam_w(4, 1, 2, 0, 10, "/");          ram_w(4, 0, SKIP_UNTIL, 4, 11);
    cam_w(5, 1, 2, 0, 11, "2024");       ram_w(5, 0, 0, 0, 5);
    // Rule B: student /CA/.* and course /.*/Math -> 7  (app 2, type 1)
    cam_w(6, 2, 1, 0, INIT_STATE, "");   ram_w(6, 0, 0, 4, 20);
    cam_w(7, 2, 1, 0, 20, "/CA/");       ram_w(7, 1, 0, 1, 21);
    cam_w(8, 2, 1, 1, 21, "/");          ram_w(8, 1, SKIP_UNTIL, 4, 22);
    cam_w(9, 2, 1, 1, 22, "Math");       ram_w(9, 0, 0, 0, 7);
    // Chain: field 0, k x (skip 1, match "x"), app 3: state s -> s+1, out 40+k
    cam_w(20, 3, 1, 0, INIT_STATE, ""); ram_w(20, 0, 1, 1, 30);
    for (int k = 0; k < 8; k++) begin
      cam_w(21 + k, 3, 1, 0, 8'(30 + k), "x");
      ram_w(21 + k, 0, 1, 1, 8'(31 + k));
    end
    // exits: a "y" after k matches ends with queue 40+k
    for (int k = 1; k <= 8; k++) begin
      cam_w(40 + k, 3, 1, 0, 8'(30 + k), "y");
      ram_w(40 + k, 0, 0, 0, 8'(40 + k));
    end

    p = {}; tlv(p, 0, "xy/AAAzBB"); tlv(p, 1, "/EE/Net");
    expect_q("fig9 hit", p, 1, 1, 2);
    p = {}; tlv(p, 0, "xy/AAAzBC"); tlv(p, 1, "/EE/Net");
    expect_q("fig9 miss", p, 1, 1, 9);
    p = {}; tlv(p, 0, "/CA/20240919"); tlv(p, 1, "/EE/Math");
    expect_q("rule A hit", p, 1, 2, 5);
    p = {}; tlv(p, 0, "/PA/202345");
    expect_q("rule A miss", p, 1, 2, 9);
    p = {}; tlv(p, 0, "/CA/2023"); tlv(p, 1, "/CS/Math"); tlv(p, 2, "great course");
    expect_q("rule B hit", p, 2, 1, 7);
    p = {}; tlv(p, 0, "/CA/2023"); tlv(p, 1, "/CS/Phys");
    expect_q("rule B miss", p, 2, 1, 9);
    p = {}; tlv(p, 0, "/NY/2023"); tlv(p, 1, "/CS/Math");
    expect_q("rule B wrong campus", p, 2, 1, 9);
    p = {}; tlv(p, 0, "/CA/2023");
    expect_q("unknown app", p, 7, 7, 9);
    // long field: SkipUntil across more than one window
    p = {}; begin
      string s;
      s = "";
      for (int i = 0; i < 100; i++) s = {s, "z"};
      s = {s, "/AAAqBB"};
      tlv(p, 0, s);
    end
    for (int i = 0; i < 300; i++) p.push_back(8'(i));  // review bytes, flushed
    expect_q("fig9 long field", p, 1, 1, 2);

    // 6 cycles per skip-and-match
    for (int k = 1; k <= 8; k++) begin
      string s;
      s = "";
      for (int i = 0; i < k; i++) s = {s, "-x"};
      s = {s, "-y"};
      p = {}; tlv(p, 0, s);
      run(p, 3, 1, q, lat_k[k], lk);
      checks++;
      if (q != 8'(40 + k)) begin failures++; $display("FAIL chain %0d: queue %0d", k, q); end
      checks++;
      if (lk != k + 1) begin failures++; $display("FAIL chain %0d: %0d lookups", k, lk); end
    end
    $display("start-to-result cycles for 2..9 skip-and-matches: %0d %0d %0d %0d %0d %0d %0d %0d",
             lat_k[1], lat_k[2], lat_k[3], lat_k[4], lat_k[5], lat_k[6], lat_k[7], lat_k[8]);
    for (int k = 2; k <= 8; k++) begin
      checks++;
      e = lat_k[k] - lat_k[k-1];
      if (e != 6) begin failures++; $display("FAIL: skip-and-match %0d costs %0d cycles", k, e); end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
