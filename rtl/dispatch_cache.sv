// dispatch_cache: stash of dispatch results, one entry per active message.
//
// DEPTH entries of 41 bits, {valid, 32-bit message ID, 8-bit RX queue}, as in
// the paper. A message's first packet writes its RSD result (fill); each
// later packet of the message looks its queue up by message ID. The table is
// direct mapped on the low bits of the message ID: a fill replaces whatever
// message used the slot, and a later packet whose message is no longer in its
// slot misses and is discarded downstream, as the paper does for packets
// whose first packet was never seen. When a message completes or expires its
// entry is invalidated (inval, only if the slot still holds that message).
// Direct mapping and invalidation on completion are this design's choices.
//
// Timing: a lookup presented in cycle t answers in cycle t+2 (rsp_valid,
// rsp_hit, rsp_rxq): one cycle to register the index, one to read the RAM,
// matching the paper's 2 cycles. Fill and inval take effect at the end of the
// cycle they are presented in; fill wins over inval on the same slot.
module dispatch_cache #(
  parameter int unsigned DEPTH = 128
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        fill_en,
  input  logic [31:0] fill_msg_id,
  input  logic [7:0]  fill_rxq,
  input  logic        inval_en,
  input  logic [31:0] inval_msg_id,
  input  logic        lk_en,
  input  logic [31:0] lk_msg_id,
  output logic        rsp_valid,
  output logic        rsp_hit,
  output logic [7:0]  rsp_rxq
);
  localparam int unsigned AW = $clog2(DEPTH);

  typedef struct packed {
    logic        valid;
    logic [31:0] msg_id;
    logic [7:0]  rxq;
  } stash_t;

  stash_t        mem [DEPTH];
  logic          s1_v, s2_v;
  logic [31:0]   s1_id, s2_id;
  stash_t        s2_e;

  logic [AW-1:0] fa, ia;
  assign fa = fill_msg_id[AW-1:0];
  assign ia = inval_msg_id[AW-1:0];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < DEPTH; i++) mem[i].valid <= 1'b0;
      s1_v <= 1'b0;
      s2_v <= 1'b0;
    end else begin
      if (inval_en && mem[ia].msg_id == inval_msg_id && !(fill_en && fa == ia))
        mem[ia].valid <= 1'b0;
      if (fill_en) mem[fa] <= '{valid: 1'b1, msg_id: fill_msg_id, rxq: fill_rxq};
      s1_v  <= lk_en;
      s1_id <= lk_msg_id;
      s2_v  <= s1_v;
      s2_id <= s1_id;
      s2_e  <= mem[s1_id[AW-1:0]];
    end
  end

  assign rsp_valid = s2_v;
  assign rsp_hit   = s2_e.valid && s2_e.msg_id == s2_id;
  assign rsp_rxq   = s2_e.rxq;
endmodule
