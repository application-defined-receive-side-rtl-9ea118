// byte_pipe: serial byte stream for the Matcher, built from NFIFO parallel
// first-word-fall-through FIFOs whose words are single bytes.
//
// Bytes are spread round-robin across the FIFOs. A write index names the
// FIFO that takes the next written byte and a read index the FIFO that holds
// the oldest byte, so byte k of the stream sits at the head of FIFO
// (rd_idx + k) mod NFIFO. This lets one round write, or read, up to NFIFO
// bytes at once, each FIFO moving at most one byte per round. This
// organisation, the 64 FIFOs of depth 128 and the 3-cycle read and write
// rounds follow the paper.
//
// Operations:
//   write   wr_valid/wr_ready, wr_data (byte 0 in [7:0]) and wr_len (1..NFIFO).
//           Cycle 1 accepts; cycle 2 stores the rotated bytes; cycle 3 the
//           window shows them. Writes may be issued back to back.
//   read    rd_valid/rd_ready, rd_len (1..NFIFO, at most win_cnt). Cycle 1
//           accepts, cycle 2 advances the FIFO read pointers, cycle 3 reloads
//           the window. rd_ready and win_ok are low during cycles 2 and 3.
//   inspect win (byte k = stream byte k) and win_cnt (valid bytes, up to
//           NFIFO) are registers, usable at once whenever win_ok is high.
//   until   until_found/until_pos: first window byte equal to UNTIL_CHAR
//           ('/'), found by a priority encoder on the window (Fig. 8).
module byte_pipe #(
  parameter int unsigned NFIFO = 64,
  parameter int unsigned DEPTH = 128
) (
  input  logic                       clk,
  input  logic                       rst,
  // write
  input  logic                       wr_valid,
  output logic                       wr_ready,
  input  logic [8*NFIFO-1:0]         wr_data,
  input  logic [$clog2(NFIFO):0]     wr_len,
  // read
  input  logic                       rd_valid,
  output logic                       rd_ready,
  input  logic [$clog2(NFIFO):0]     rd_len,
  // inspect
  output logic                       win_ok,
  output logic [8*NFIFO-1:0]         win,
  output logic [$clog2(NFIFO):0]     win_cnt,
  output logic                       until_found,
  output logic [$clog2(NFIFO)-1:0]   until_pos,
  // status
  output logic [$clog2(NFIFO*DEPTH):0] count
);
  import qn_pkg::*;

  localparam int unsigned IW = $clog2(NFIFO);
  localparam int unsigned PW = $clog2(DEPTH);
  localparam int unsigned CW = $clog2(NFIFO*DEPTH) + 1;

  logic [7:0]    mem [NFIFO][DEPTH];
  logic [PW-1:0] rp  [NFIFO];
  logic [PW-1:0] wp  [NFIFO];
  logic [IW-1:0] rd_idx, wr_idx;
  logic [CW-1:0] cnt;

  // write round, stage 1
  logic            ws_v;
  logic [IW:0]     ws_len;
  logic [8*NFIFO-1:0] ws_data;
  // read round, stages 1 and 2
  logic            rs1_v, rs2_v;
  logic [IW:0]     rs1_len;

  // Space check counts the write still in stage 1.
  assign wr_ready = (32'(cnt) + 32'(ws_v ? ws_len : '0) + 32'(NFIFO)) <= 32'(NFIFO*DEPTH);
  assign rd_ready = !rs1_v && !rs2_v;
  assign win_ok   = !rs1_v && !rs2_v;
  assign count    = cnt;

  logic [IW:0] push_n, pop_n;
  assign push_n = ws_v  ? ws_len  : '0;
  assign pop_n  = rs1_v ? rs1_len : '0;

  always_ff @(posedge clk) begin
    if (rst) begin
      ws_v   <= 1'b0;
      rs1_v  <= 1'b0;
      rs2_v  <= 1'b0;
      rd_idx <= '0;
      wr_idx <= '0;
      cnt    <= '0;
      for (int i = 0; i < NFIFO; i++) begin
        rp[i] <= '0;
        wp[i] <= '0;
      end
    end else begin
      // stage 1 registers
      ws_v    <= wr_valid && wr_ready;
      ws_len  <= wr_len;
      ws_data <= wr_data;
      rs1_v   <= rd_valid && rd_ready;
      rs1_len <= rd_len;
      rs2_v   <= rs1_v;
      // stage 2: commit write into the FIFOs
      if (ws_v) begin
        for (int j = 0; j < NFIFO; j++) begin
          if (j < int'(ws_len)) begin
            automatic int f = (int'(wr_idx) + j) % NFIFO;
            mem[f][wp[f]] <= ws_data[8*j +: 8];
            wp[f] <= wp[f] + 1'b1;
          end
        end
        wr_idx <= IW'((int'(wr_idx) + int'(ws_len)) % NFIFO);
      end
      // stage 2: pop from the FIFOs
      if (rs1_v) begin
        for (int j = 0; j < NFIFO; j++) begin
          if (j < int'(rs1_len)) begin
            automatic int f = (int'(rd_idx) + j) % NFIFO;
            rp[f] <= rp[f] + 1'b1;
          end
        end
        rd_idx <= IW'((int'(rd_idx) + int'(rs1_len)) % NFIFO);
      end
      cnt <= cnt + CW'(push_n) - CW'(pop_n);
    end
  end

  // Window register: FIFO heads in stream order, reloaded every cycle.
  always_ff @(posedge clk) begin
    if (rst) begin
      win     <= '0;
      win_cnt <= '0;
    end else begin
      for (int k = 0; k < NFIFO; k++) begin
        automatic int f = (int'(rd_idx) + k) % NFIFO;
        win[8*k +: 8] <= mem[f][rp[f]];
      end
      win_cnt <= (cnt >= CW'(NFIFO)) ? (IW+1)'(NFIFO) : (IW+1)'(cnt);
    end
  end

  // Priority encoder for SkipUntil.
  always_comb begin
    until_found = 1'b0;
    until_pos   = '0;
    for (int k = NFIFO - 1; k >= 0; k--) begin
      if (k < int'(win_cnt) && win[8*k +: 8] == UNTIL_CHAR) begin
        until_found = 1'b1;
        until_pos   = IW'(k);
      end
    end
  end

  a_rd_len: assert property (@(posedge clk) disable iff (rst)
    rd_valid && rd_ready |-> rd_len <= win_cnt && rd_len != 0);
  a_wr_len: assert property (@(posedge clk) disable iff (rst)
    wr_valid && wr_ready |-> wr_len <= (IW+1)'(NFIFO));
endmodule
