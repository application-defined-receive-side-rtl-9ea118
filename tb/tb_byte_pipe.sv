// tb_byte_pipe: self-checking test of the BytePipe. A reference byte queue
// models the stream. Checks: the Fig. 8 read of "BEE/" and write of "DECAF"
// with a read index of 1; window contents and count after random writes and
// reads of 1..64 bytes; the '/' priority encoder; the 3-cycle read round;
// simultaneous read and write; back-pressure at 8192 bytes.
module tb_byte_pipe;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic         wr_valid = 0, wr_ready, rd_valid = 0, rd_ready, win_ok, until_found;
  logic [511:0] wr_data = '0, win;
  logic [6:0]   wr_len = 0, rd_len = 0, win_cnt;
  logic [5:0]   until_pos;
  logic [13:0]  count;

  byte_pipe dut (.clk, .rst, .wr_valid, .wr_ready, .wr_data, .wr_len,
    .rd_valid, .rd_ready, .rd_len, .win_ok, .win, .win_cnt, .until_found, .until_pos, .count);

  byte unsigned model[$];

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic wr(byte unsigned b[$]);
    @(negedge clk);
    wr_data = '0;
    foreach (b[i]) begin wr_data[8*i +: 8] = b[i]; model.push_back(b[i]); end
    wr_len = 7'(b.size()); wr_valid = 1;
    @(posedge clk); #0;
    check(wr_ready, "write accepted");
    @(negedge clk); wr_valid = 0;
  endtask

  task automatic wait_ok();
    repeat (3) @(posedge clk);
    while (!win_ok) @(posedge clk);
    @(negedge clk);
  endtask

  task automatic check_win(string tag);
    int n = (model.size() > 64) ? 64 : model.size();
    bit ok = (int'(win_cnt) == n) && (int'(count) == model.size());
    int slash = -1;
    for (int k = 0; k < n; k++) if (win[8*k +: 8] != model[k]) ok = 0;
    for (int k = n - 1; k >= 0; k--) if (model[k] == 8'h2f) slash = k;
    check(ok, {tag, ": window/count"});
    check((slash >= 0) == until_found && (slash < 0 || int'(until_pos) == slash), {tag, ": priority encoder"});
  endtask

  task automatic rd(int n, output int cyc);
    @(negedge clk);
    rd_len = 7'(n); rd_valid = 1;
    @(posedge clk); #0;
    check(rd_ready, "read accepted");
    @(negedge clk); rd_valid = 0;
    repeat (n) void'(model.pop_front());
    cyc = 1;
    while (!win_ok) begin cyc++; @(negedge clk); end
  endtask

  byte unsigned b[$];
  int cyc;

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    // Fig. 8 example, 64-wide: read index 1 after one byte was read
    wr('{8'h41, 8'h42, 8'h45, 8'h45, 8'h2f}); // "ABEE/"
    wait_ok();
    rd(1, cyc);
    check_win("after 1-byte read");
    check(until_found && until_pos == 6'd3, "'/' of BEE/ at index 3");
    rd(4, cyc);
    check(cyc == 3, "read round takes 3 cycles");
    check_win("after BEE/");
    check(count == 0, "empty");
    wr('{8'h44, 8'h45, 8'h43, 8'h41, 8'h46}); // DECAF
    wait_ok();
    check_win("after DECAF");
    rd(5, cyc);
    wait_ok();
    // random traffic
    for (int it = 0; it < 300; it++) begin
      int n;
      n = 1 + int'($urandom % 64);
      b = {};
      for (int k = 0; k < n; k++) b.push_back(($urandom % 8 == 0) ? 8'h2f : 8'($urandom));
      if (model.size() + n <= 8000) wr(b);
      wait_ok();
      check_win("random write");
      if (model.size() > 0 && $urandom % 3 != 0) begin
        int lim, m;
        lim = (model.size() > 64) ? 64 : model.size();
        m = 1 + int'($urandom % lim);
        rd(m, cyc);
        wait_ok();
        check_win("random read");
      end
    end
    // simultaneous read and write
    while (model.size() < 64) begin
      b = {}; for (int k = 0; k < 64; k++) b.push_back(8'(k)); wr(b); wait_ok();
    end
    @(negedge clk);
    wr_data = '0; b = {};
    for (int k = 0; k < 10; k++) begin wr_data[8*k +: 8] = 8'(100 + k); b.push_back(8'(100 + k)); end
    wr_len = 10; wr_valid = 1; rd_len = 7; rd_valid = 1;
    @(posedge clk); #0;
    check(wr_ready && rd_ready, "simultaneous accept");
    @(negedge clk); wr_valid = 0; rd_valid = 0;
    repeat (7) void'(model.pop_front());
    foreach (b[i]) model.push_back(b[i]);
    wait_ok();
    check_win("simultaneous");
    // fill to capacity
    while (1) begin
      @(negedge clk);
      wr_len = 64; wr_valid = 1; wr_data = '1;
      @(posedge clk); #0;
      if (!wr_ready) break;
      for (int k = 0; k < 64; k++) model.push_back(8'hff);
    end
    @(negedge clk); wr_valid = 0;
    wait_ok();
    check(model.size() <= 8192 && model.size() > 8192 - 128, "filled near 8192 bytes");
    check(int'(count) == model.size(), "count at capacity");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
