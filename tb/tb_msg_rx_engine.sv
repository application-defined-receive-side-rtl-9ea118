// tb_msg_rx_engine: self-checking test of the per-message state table
// (small timeout). Checks probe/alloc, completion of 1-, 2- and 4-packet
// messages in any packet order, no completion before the last packet, no
// double counting of a repeated packet, slot reuse, expiry of an idle
// message with its descriptor returned, and cache invalidation.
module tb_msg_rx_engine;
  import qn_pkg::*;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid = 0, cmd_ready, rsp_valid, rsp_found, rsp_free, cpl_valid, cpl_ready = 1, inval_en;
  logic [1:0] cmd_op = 0;
  logic [31:0] cmd_msg_id = 0, inval_msg_id;
  logic [7:0] cmd_rxq = 0, cmd_len = 0, cmd_seq = 0, rsp_rxq;
  desc_t cmd_desc = '0, rsp_desc;
  cpl_t cpl;
  logic [9:0] active;

  msg_rx_engine #(.ENTRIES(512), .TICK_DIV(4), .TIMEOUT_TICKS(200)) dut (.clk, .rst,
    .cmd_valid, .cmd_ready, .cmd_op, .cmd_msg_id, .cmd_rxq, .cmd_len, .cmd_seq, .cmd_desc,
    .rsp_valid, .rsp_found, .rsp_free, .rsp_desc, .rsp_rxq,
    .cpl_valid, .cpl_ready, .cpl, .inval_en, .inval_msg_id, .active);

  cpl_t cpls[$];
  int   invals = 0;
  always @(posedge clk) begin
    if (!rst && cpl_valid && cpl_ready) cpls.push_back(cpl);
    if (!rst && inval_en) invals++;
  end

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c, string s);
    checks++; if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  task automatic cmd(logic [1:0] op, logic [31:0] id, logic [7:0] q, logic [7:0] len, logic [7:0] seq, logic [63:0] addr);
    @(negedge clk);
    cmd_valid = 1; cmd_op = op; cmd_msg_id = id; cmd_rxq = q; cmd_len = len; cmd_seq = seq;
    cmd_desc = '{rsvd: 0, len: 32'd6000, addr: addr};
    @(posedge clk); #0;
    while (!cmd_ready) begin @(posedge clk); #0; end
    @(negedge clk);
    cmd_valid = 0;
  endtask

  task automatic probe(logic [31:0] id, bit found, bit free, logic [63:0] addr);
    cmd(2'd0, id, 0, 0, 0, 0);
    chk(rsp_valid && rsp_found == found && rsp_free == free && (!found || rsp_desc.addr == addr),
        $sformatf("probe %h", id));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    probe(7, 0, 1, 0);
    cmd(2'd1, 7, 3, 4, 0, 64'h1000);         // 4-packet message
    probe(7, 1, 0, 64'h1000);
    probe(7 + 512, 0, 0, 0);                 // other message, same slot
    cmd(2'd2, 7, 0, 0, 2, 0);
    cmd(2'd2, 7, 0, 0, 0, 0);
    cmd(2'd2, 7, 0, 0, 2, 0);                // repeated packet
    cmd(2'd2, 7, 0, 0, 1, 0);
    repeat (2) @(posedge clk);
    chk(cpls.size() == 0, "no completion before last packet");
    cmd(2'd2, 7, 0, 0, 3, 0);
    repeat (3) @(posedge clk);
    chk(cpls.size() == 1 && !cpls[0].expired && cpls[0].msg_id == 7 && cpls[0].rxq == 3 &&
        cpls[0].desc.addr == 64'h1000, "4-packet message completes");
    chk(invals == 1, "cache invalidated on completion");
    probe(7, 0, 1, 0);
    // 1-packet message
    cmd(2'd1, 9, 5, 1, 0, 64'h2000);
    cmd(2'd2, 9, 0, 0, 0, 0);
    repeat (3) @(posedge clk);
    chk(cpls.size() == 2 && cpls[1].msg_id == 9 && !cpls[1].expired, "1-packet message");
    chk(active == 0, "no active messages");
    // expiry: 2-packet message gets only packet 0
    cmd(2'd1, 20, 6, 2, 0, 64'h3000);
    cmd(2'd2, 20, 0, 0, 0, 0);
    chk(active == 1, "one active message");
    repeat (600) @(posedge clk);
    chk(cpls.size() == 2, "not expired before the timeout");
    repeat (1400) @(posedge clk);
    chk(cpls.size() == 3 && cpls[2].expired && cpls[2].msg_id == 20 && cpls[2].desc.addr == 64'h3000,
        "idle message expires and returns its descriptor");
    chk(invals == 3, "cache invalidated on expiry");
    probe(20, 0, 1, 0);
    cmd(2'd2, 20, 0, 0, 1, 0);               // late packet: no effect
    repeat (3) @(posedge clk);
    chk(cpls.size() == 3, "late packet after expiry ignored");
    // back-pressure on notifications
    cpl_ready = 0;
    cmd(2'd1, 30, 1, 1, 0, 64'h4000);
    cmd(2'd2, 30, 0, 0, 0, 0);
    repeat (2) @(posedge clk); #0;
    chk(!cmd_ready && cpl_valid, "commands held while a notification waits");
    cpl_ready = 1;
    repeat (2) @(posedge clk);
    chk(cpls.size() == 4 && cpls[3].msg_id == 30, "held notification delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
