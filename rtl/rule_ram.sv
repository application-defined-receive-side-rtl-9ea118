// rule_ram: the Matcher's RAM of skip states.
//
// ENTRIES 32-bit ram_entry_t words {field index, bytes to skip, bytes to
// inspect, state}, addressed by the CAM's match index. One write port for
// the controller and one synchronous read port: the address presented in
// cycle t gives the entry at the end of t. Contents after reset are
// undefined until written; the rules written by the controller only reach
// entries the controller also filled. Width and depth follow the paper.
module rule_ram #(
  parameter int unsigned ENTRIES = 512
) (
  input  logic                        clk,
  input  logic                        wr_en,
  input  logic [$clog2(ENTRIES)-1:0]  wr_addr,
  input  qn_pkg::ram_entry_t          wr_entry,
  input  logic                        rd_en,
  input  logic [$clog2(ENTRIES)-1:0]  rd_addr,
  output qn_pkg::ram_entry_t          rd_entry
);
  import qn_pkg::*;

  ram_entry_t mem [ENTRIES];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_entry;
    if (rd_en) rd_entry <= mem[rd_addr];
  end
endmodule
