// tb_pkt_buffer: self-checking test of the transient packet buffer with
// random push and pop pressure against a queue model, including full and
// empty conditions.
module tb_pkt_buffer;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [63:0] in_data = 0, out_data;
  logic [5:0] level;
  logic [63:0] m[$];
  int seen_full = 0;

  pkt_buffer #(.WIDTH(64), .DEPTH(32)) dut (.clk, .rst, .in_valid, .in_ready, .in_data,
    .out_valid, .out_ready, .out_data, .level);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      in_valid  = ($urandom % 100) < ((i / 1000) % 2 ? 30 : 80);
      in_data   = {$urandom, $urandom};
      out_ready = ($urandom % 100) < ((i / 1000) % 2 ? 80 : 30);
      @(posedge clk); #0;
      checks++;
      if (int'(level) != m.size() || out_valid != (m.size() != 0) || in_ready != (m.size() < 32)) begin
        failures++; $display("FAIL status at %0d", i);
      end
      if (m.size() == 32) seen_full++;
      if (out_valid && out_ready) begin
        checks++;
        if (out_data != m[0]) begin failures++; $display("FAIL data at %0d", i); end
        void'(m.pop_front());
      end
      if (in_valid && in_ready) m.push_back(in_data);
    end
    checks++;
    if (seen_full == 0) begin failures++; $display("FAIL: never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
