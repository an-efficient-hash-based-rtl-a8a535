// bf2_array: one array BF2^i of the BF2 data structure (D rows x W bits).
//
// Each of the D rows is a separate mem_block, so all rows can be read, and
// different rows written, in the same cycle. A search reads word rd_addr of
// every row at once and returns the D words one clock later on rd_words
// (Bit_out(1:D,i) before bit selection). An insert sets bit set_idx in row
// set_row only (the active row). A clear writes zeros to word clr_addr of
// every row whose bit in clr_rows is 1.
//
// The row-per-block organisation and parallel access follow the paper's
// memory organisation; the port set is this design's.
module bf2_array #(
  parameter int unsigned W      = 16384,
  parameter int unsigned D      = 4,
  parameter int unsigned WORD_W = 32,
  localparam int unsigned NWORDS = W / WORD_W,
  localparam int unsigned AW     = $clog2(NWORDS),
  localparam int unsigned IW     = $clog2(W),
  localparam int unsigned RW     = (D > 1) ? $clog2(D) : 1
) (
  input  logic              clk,
  input  logic [AW-1:0]     rd_addr,
  output logic [WORD_W-1:0] rd_words [D],
  input  logic              set_en,
  input  logic [RW-1:0]     set_row,
  input  logic [IW-1:0]     set_idx,
  input  logic [D-1:0]      clr_rows,
  input  logic [AW-1:0]     clr_addr
);
  for (genvar j = 0; j < D; j++) begin : g_row
    mem_block #(.W(W), .WORD_W(WORD_W)) u_blk (
      .clk     (clk),
      .rd_addr (rd_addr),
      .rd_data (rd_words[j]),
      .set_en  (set_en && (set_row == RW'(j))),
      .set_idx (set_idx),
      .clr_en  (clr_rows[j]),
      .clr_addr(clr_addr)
    );
  end
endmodule
