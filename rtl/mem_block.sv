// mem_block: one 1 x W bit memory block of the BF2 array.
//
// The W bits are held as W/WORD_W words of WORD_W bits, as block RAM holds
// them. Three operations share the block:
//   read  - the word at rd_addr appears on rd_data one clock later
//           (synchronous read, like a block RAM read port);
//   set   - set_en sets the single bit set_idx (word set_idx/WORD_W, bit
//           set_idx%WORD_W) through a per-bit write enable;
//   clear - clr_en writes a whole word of zeros at clr_addr, so a row is
//           cleared WORD_W bits per cycle.
// Set and clear are never asked of the same block in the same cycle (the
// filter clears a row other than the one it writes); an assertion checks
// it. A read of a word written in the same cycle returns the old word.
//
// Word-organised storage that can be cleared a word at a time and set and
// read a bit at a time is the paper's; the word width, the bit-enable
// write and the one-cycle read latency are this design's choices.
module mem_block #(
  parameter int unsigned W      = 16384,
  parameter int unsigned WORD_W = 32,
  localparam int unsigned NWORDS = W / WORD_W,
  localparam int unsigned AW     = $clog2(NWORDS),
  localparam int unsigned IW     = $clog2(W)
) (
  input  logic              clk,
  input  logic [AW-1:0]     rd_addr,
  output logic [WORD_W-1:0] rd_data,
  input  logic              set_en,
  input  logic [IW-1:0]     set_idx,
  input  logic              clr_en,
  input  logic [AW-1:0]     clr_addr
);
  localparam int unsigned OW = $clog2(WORD_W);

  logic [WORD_W-1:0] mem [NWORDS];

  always_ff @(posedge clk) begin
    rd_data <= mem[rd_addr];
    if (clr_en)
      mem[clr_addr] <= '0;
    else if (set_en)
      mem[set_idx[IW-1:OW]][set_idx[OW-1:0]] <= 1'b1;
  end

  a_no_set_and_clear: assert property (@(posedge clk) !(set_en && clr_en))
    else $error("mem_block: set and clear in the same cycle");

  initial begin
    if (W % WORD_W != 0) $error("mem_block: W must be a multiple of WORD_W");
  end
endmodule
