// h3_hash: H3 universal hash of a pixel address.
//
// The H3 family maps a KEY_W-bit key to an OUT_W-bit index with nothing but
// AND and XOR: every key bit that is 1 selects one row of a fixed
// KEY_W x OUT_W binary matrix Q, and the index is the XOR of the selected
// rows. Hash unit i of the filter turns the address (x,y) into the bit
// pointer BitPtr(i) into its BF2 array, so OUT_W = log2(W).
//
// The filter's use of H3 follows the paper; the matrix is this design's
// own: row r is h3_row(SEED, r) from bf2_pkg (a xorshift32 sequence), so
// that each of the K hash units gets an independent matrix from its SEED.
//
// Interface: key in, idx out. Purely combinational, no clock.
module h3_hash #(
  parameter int unsigned KEY_W = 18,
  parameter int unsigned OUT_W = 14,
  parameter int unsigned SEED  = 1
) (
  input  logic [KEY_W-1:0] key,
  output logic [OUT_W-1:0] idx
);
  import bf2_pkg::*;

  logic [OUT_W-1:0] q [KEY_W];

  for (genvar r = 0; r < KEY_W; r++) begin : g_q
    localparam logic [31:0] ROW = h3_row(SEED, r);
    assign q[r] = ROW[OUT_W-1:0];
  end

  always_comb begin
    idx = '0;
    for (int r = 0; r < KEY_W; r++)
      idx = idx ^ (q[r] & {OUT_W{key[r]}});
  end

  initial begin
    if (OUT_W > 32) $error("h3_hash: OUT_W must be at most 32");
  end
endmodule
