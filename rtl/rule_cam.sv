// rule_cam: the Matcher's content addressable memory of match states.
//
// Each of ENTRIES entries holds a 96-bit cam_entry_t, {app ID, message type,
// field index} (the 24-bit key), an 8-bit state and an 8-byte string, plus a
// valid bit. A lookup presents a key, a state and up to 8 inspected bytes
// with their count; an entry hits when key and state are equal and the first
// lk_len bytes of its string equal the inspected bytes (bytes past lk_len are
// ignored, so a lookup with lk_len = 0 matches on key and state alone). All
// entries are compared in parallel and the lowest-numbered hit wins.
// Entry layout and the 512 entries follow the paper; the masking by length,
// the lowest-index priority and the valid bit are this design's choices.
//
// Timing: lookup inputs in cycle t, hit/idx registered at the end of t.
// Writes take effect at the end of the cycle they are presented in.
module rule_cam #(
  parameter int unsigned ENTRIES = 512
) (
  input  logic                        clk,
  input  logic                        rst,
  // configuration write
  input  logic                        wr_en,
  input  logic [$clog2(ENTRIES)-1:0]  wr_addr,
  input  qn_pkg::cam_entry_t          wr_entry,
  input  logic                        wr_valid_bit,
  // lookup
  input  logic                        lk_en,
  input  qn_pkg::cam_entry_t          lk_key,
  input  logic [3:0]                  lk_len,
  output logic                        hit,
  output logic [$clog2(ENTRIES)-1:0]  idx
);
  import qn_pkg::*;
  localparam int unsigned AW = $clog2(ENTRIES);

  cam_entry_t  ent [ENTRIES];
  logic        vld [ENTRIES];

  logic [63:0] mask;
  always_comb begin
    for (int b = 0; b < MATCH_BYTES; b++) mask[8*b +: 8] = (b < int'(lk_len)) ? 8'hff : 8'h00;
  end

  logic          hit_c;
  logic [AW-1:0] idx_c;
  always_comb begin
    hit_c = 1'b0;
    idx_c = '0;
    for (int e = ENTRIES - 1; e >= 0; e--) begin
      if (vld[e] &&
          ent[e].app_id    == lk_key.app_id &&
          ent[e].msg_type  == lk_key.msg_type &&
          ent[e].field_idx == lk_key.field_idx &&
          ent[e].state     == lk_key.state &&
          ((ent[e].data ^ lk_key.data) & mask) == 64'd0) begin
        hit_c = 1'b1;
        idx_c = AW'(e);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int e = 0; e < ENTRIES; e++) vld[e] <= 1'b0;
      hit <= 1'b0;
      idx <= '0;
    end else begin
      if (wr_en) begin
        ent[wr_addr] <= wr_entry;
        vld[wr_addr] <= wr_valid_bit;
      end
      if (lk_en) begin
        hit <= hit_c;
        idx <= idx_c;
      end
    end
  end
endmodule
