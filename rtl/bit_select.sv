// bit_select: the Bit Select stage between the BF2 arrays and the row AND
// gates.
//
// The memory returns whole words; the filter needs single bits. For every
// hash i and row j this stage picks bit offs[i] of the word read from
// row j of array i, and regroups the result by row, so that bits[j] holds
// Bit_out(j,1:K), ready for the AND gate of row j.
//
// offs[i] must be the low log2(WORD_W) bits of BitPtr(i) of the search
// whose words are on `words`, i.e. delayed by the memory's read latency.
// Purely combinational. The stage's place and name are the paper's; its
// insides (a WORD_W-to-1 multiplexer per block) are this design's.
module bit_select #(
  parameter int unsigned D      = 4,
  parameter int unsigned K      = 4,
  parameter int unsigned WORD_W = 32,
  localparam int unsigned OW    = $clog2(WORD_W)
) (
  input  logic [WORD_W-1:0] words [K][D],
  input  logic [OW-1:0]     offs  [K],
  output logic [K-1:0]      bits  [D]
);
  always_comb begin
    for (int j = 0; j < D; j++)
      for (int i = 0; i < K; i++)
        bits[j][i] = words[i][j][offs[i]];
  end
endmodule
