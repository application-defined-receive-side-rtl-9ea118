// tb_rule_cam: self-checking test of the match-state CAM against a
// software model: random entries, lookups with 0..8 inspected bytes,
// priority of the lowest matching entry, invalidation and the
// one-cycle registered result.
module tb_rule_cam;
  import qn_pkg::*;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic       wr_en = 0, wr_valid_bit = 0, lk_en = 0, hit;
  logic [8:0] wr_addr = 0, idx;
  cam_entry_t wr_entry = '0, lk_key = '0;
  logic [3:0] lk_len = 0;

  rule_cam dut (.clk, .rst, .wr_en, .wr_addr, .wr_entry, .wr_valid_bit, .lk_en, .lk_key, .lk_len, .hit, .idx);

  cam_entry_t m_e [512];
  bit         m_v [512];

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic cam_entry_t rnd_entry();
    cam_entry_t e;
    e.app_id = 8'($urandom % 2); e.msg_type = 8'($urandom % 2); e.field_idx = 8'($urandom % 2);
    e.state = 8'($urandom % 4);
    e.data = {$urandom, $urandom} & 64'h0303030303030303;
    return e;
  endfunction

  task automatic write(int a, cam_entry_t e, bit v);
    @(negedge clk);
    wr_en = 1; wr_addr = 9'(a); wr_entry = e; wr_valid_bit = v;
    @(negedge clk);
    wr_en = 0;
    m_e[a] = e; m_v[a] = v;
  endtask

  task automatic lookup(cam_entry_t k, int n);
    logic [63:0] mask = '0;
    int exp_idx = -1;
    for (int b = 0; b < n; b++) mask[8*b +: 8] = 8'hff;
    for (int e = 511; e >= 0; e--)
      if (m_v[e] && m_e[e].app_id == k.app_id && m_e[e].msg_type == k.msg_type &&
          m_e[e].field_idx == k.field_idx && m_e[e].state == k.state &&
          ((m_e[e].data ^ k.data) & mask) == 0) exp_idx = e;
    @(negedge clk);
    lk_en = 1; lk_key = k; lk_len = 4'(n);
    @(negedge clk);
    lk_en = 0;
    checks++;
    if (hit != (exp_idx >= 0) || (exp_idx >= 0 && int'(idx) != exp_idx)) begin
      failures++;
      $display("FAIL lookup: hit %0d idx %0d expected %0d", hit, idx, exp_idx);
    end
  endtask

  initial begin
    for (int e = 0; e < 512; e++) m_v[e] = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int e = 0; e < 512; e++) write(e, rnd_entry(), ($urandom % 4) != 0);
    for (int i = 0; i < 2000; i++) lookup(rnd_entry(), int'($urandom % 9));
    // a length-0 lookup hits the first entry with equal key and state
    lookup('{app_id: 0, msg_type: 0, field_idx: 0, state: 0, data: 64'hdead}, 0);
    // priority: duplicate entry 300 at 10
    write(10, m_e[300], 1); write(300, m_e[300], 1);
    lookup(m_e[300], 8);
    for (int e = 0; e < 512; e++) if (m_v[e] && $urandom % 2) write(e, m_e[e], 0);
    for (int i = 0; i < 500; i++) lookup(rnd_entry(), int'($urandom % 9));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
