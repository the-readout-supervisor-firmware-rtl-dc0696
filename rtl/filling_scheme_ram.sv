// filling_scheme_ram: the LHC filling scheme, one crossing type per bunch.
//
// WORDS x WORD_W bits (224 x 32 as printed in the block diagram). Each word
// packs WORD_W/2 crossing types of two bits; crossing b is in word b/16,
// bits [2*(b%16)+1 : 2*(b%16)]. 224*32 = 7168 bits cover the 3564 crossings
// of an orbit (7128 bits). The packing and the type encoding (rs_pkg::bx_type_e)
// are this design's choice. The control system writes whole words; the core
// reads one crossing type per clock.
//
// Timing: rd_type is registered, valid one cycle after rd_bxid. Feed it the
// counter's bxid_next to get the type of the current bxid.
module filling_scheme_ram
  import rs_pkg::*;
#(
  parameter int unsigned WORDS  = 224,
  parameter int unsigned WORD_W = 32,
  localparam int unsigned AW    = $clog2(WORDS),
  localparam int unsigned PER_W = WORD_W / 2
) (
  input  logic              clk,
  input  logic              wr_en,
  input  logic [AW-1:0]     wr_addr,
  input  logic [WORD_W-1:0] wr_data,
  input  logic [BXID_W-1:0] rd_bxid,
  output bx_type_e          rd_type
);

  logic [WORD_W-1:0] mem [WORDS];
  logic [WORD_W-1:0] rd_word;
  logic [$clog2(PER_W)-1:0] sel_q;

  // Clear at start so that an unconfigured scheme reads as empty-empty.
  initial for (int i = 0; i < WORDS; i++) mem[i] = '0;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rd_word <= (32'(rd_bxid) / PER_W < WORDS) ? mem[AW'(rd_bxid / PER_W)] : '0;
    sel_q   <= rd_bxid[$clog2(PER_W)-1:0];
  end

  assign rd_type = bx_type_e'(rd_word[2*sel_q +: 2]);

endmodule
