// tb_dispatch_cache: self-checking test of the dispatch-result stash:
// fills, lookups answered exactly 2 cycles later, misses for unknown and
// replaced message IDs (same slot), invalidation only of the named message.
module tb_dispatch_cache;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic fill_en = 0, inval_en = 0, lk_en = 0, rsp_valid, rsp_hit;
  logic [31:0] fill_msg_id = 0, inval_msg_id = 0, lk_msg_id = 0;
  logic [7:0] fill_rxq = 0, rsp_rxq;

  dispatch_cache dut (.clk, .rst, .fill_en, .fill_msg_id, .fill_rxq, .inval_en, .inval_msg_id,
    .lk_en, .lk_msg_id, .rsp_valid, .rsp_hit, .rsp_rxq);

  // model: slot -> {valid, id, q}
  bit m_v[128]; logic [31:0] m_id[128]; logic [7:0] m_q[128];

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c, string s);
    checks++; if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  task automatic fill(logic [31:0] id, logic [7:0] q);
    @(negedge clk); fill_en = 1; fill_msg_id = id; fill_rxq = q;
    @(negedge clk); fill_en = 0;
    m_v[id[6:0]] = 1; m_id[id[6:0]] = id; m_q[id[6:0]] = q;
  endtask

  task automatic inval(logic [31:0] id);
    @(negedge clk); inval_en = 1; inval_msg_id = id;
    @(negedge clk); inval_en = 0;
    if (m_id[id[6:0]] == id) m_v[id[6:0]] = 0;
  endtask

  task automatic lookup(logic [31:0] id);
    int c = 0;
    bit eh = m_v[id[6:0]] && m_id[id[6:0]] == id;
    @(negedge clk); lk_en = 1; lk_msg_id = id;
    @(negedge clk); lk_en = 0; lk_msg_id = 32'hffffffff;
    c = 1;
    while (!rsp_valid && c < 10) begin @(negedge clk); c++; end
    chk(c == 2, "2-cycle lookup");
    chk(rsp_hit == eh && (!eh || rsp_rxq == m_q[id[6:0]]), "lookup result");
  endtask

  initial begin
    for (int i = 0; i < 128; i++) m_v[i] = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    lookup(5);
    fill(5, 3); lookup(5);
    fill(32'h1000_0005, 9); lookup(5); lookup(32'h1000_0005);   // same slot replaces
    inval(5); lookup(32'h1000_0005);                             // other message: kept
    inval(32'h1000_0005); lookup(32'h1000_0005);                 // gone
    for (int i = 0; i < 2000; i++) begin
      logic [31:0] id;
      id = {24'($urandom % 4), 8'($urandom)};
      case ($urandom % 3)
        0: fill(id, 8'($urandom));
        1: inval(id);
        default: lookup(id);
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
