// bf2: the BF2 data structure - K hashed bit arrays of D rows x W bits.
//
// An event at pixel (x,y) is recorded by setting, in the active row of each
// array BF2^i, the bit BitPtr(i) = hash_i(x,y). A query for (x,y) reads
// bit BitPtr(i) of every row of every array; row j "contains" (x,y) when
// the bit is set in all K arrays (an AND per row, as in a Bloom filter), so
// Dout(j) tells whether (x,y) fired during the time bin of row j. Each row
// is one time bin of tau_row; the rows together cover a sliding window of
// D x tau_row. False positives are possible (hash collisions), false
// negatives only for events in the row being cleared.
//
// Inside: K h3_hash units (one seed each), K bf2_array blocks, the
// bit_select stage, D AND gates, and the row_clear engine that zeroes the
// row after the active one while the active one is written.
//
// Interface and timing: one operation per cycle when op_valid is high.
//   op_write = 0: search key (x,y); dout/dout_valid appear one clock later.
//   op_write = 1: insert key (x,y) into row row_ptr; a search issued in the
//                 next cycle already sees it.
// row_ptr/row_adv come from the row timer. init_busy is high while the
// power-on clear runs; no operation may be issued then.
//
// The structure (hash -> arrays -> bit select -> AND per row) is the
// paper's; word width and latency are this design's.
module bf2
  import bf2_pkg::*;
#(
  parameter int unsigned W      = 16384,
  parameter int unsigned D      = 4,
  parameter int unsigned K      = 4,
  parameter int unsigned WORD_W = 32,
  localparam int unsigned RW    = (D > 1) ? $clog2(D) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           op_valid,
  input  logic           op_write,
  input  logic [X_W-1:0] key_x,
  input  logic [Y_W-1:0] key_y,
  input  logic [RW-1:0]  row_ptr,
  input  logic           row_adv,
  output logic [D-1:0]   dout,
  output logic           dout_valid,
  output logic           init_busy,
  output logic           clr_busy
);
  localparam int unsigned NWORDS = W / WORD_W;
  localparam int unsigned AW     = $clog2(NWORDS);
  localparam int unsigned IW     = $clog2(W);
  localparam int unsigned OW     = $clog2(WORD_W);
  localparam int unsigned KEY_W  = X_W + Y_W;

  logic [IW-1:0]     bit_ptr  [K];
  logic [OW-1:0]     offs_q   [K];
  logic [WORD_W-1:0] words    [K][D];
  logic [K-1:0]      row_bits [D];
  logic [D-1:0]      clr_rows;
  logic [AW-1:0]     clr_addr;

  row_clear #(.W(W), .D(D), .WORD_W(WORD_W)) u_clear (
    .clk      (clk),
    .rst_n    (rst_n),
    .row_ptr  (row_ptr),
    .row_adv  (row_adv),
    .clr_rows (clr_rows),
    .clr_addr (clr_addr),
    .busy     (clr_busy),
    .init_busy(init_busy)
  );

  for (genvar i = 0; i < K; i++) begin : g_hash
    h3_hash #(.KEY_W(KEY_W), .OUT_W(IW), .SEED(i + 1)) u_hash (
      .key({key_y, key_x}),
      .idx(bit_ptr[i])
    );

    bf2_array #(.W(W), .D(D), .WORD_W(WORD_W)) u_array (
      .clk     (clk),
      .rd_addr (bit_ptr[i][IW-1:OW]),
      .rd_words(words[i]),
      .set_en  (op_valid && op_write),
      .set_row (row_ptr),
      .set_idx (bit_ptr[i]),
      .clr_rows(clr_rows),
      .clr_addr(clr_addr)
    );

    always_ff @(posedge clk) offs_q[i] <= bit_ptr[i][OW-1:0];
  end

  bit_select #(.D(D), .K(K), .WORD_W(WORD_W)) u_bitsel (
    .words(words),
    .offs (offs_q),
    .bits (row_bits)
  );

  always_comb begin
    for (int j = 0; j < D; j++) dout[j] = &row_bits[j];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) dout_valid <= 1'b0;
    else        dout_valid <= op_valid && !op_write;
  end

  a_no_op_during_init: assert property (@(posedge clk) disable iff (!rst_n)
                                        init_busy |-> !op_valid)
    else $error("bf2: operation issued during the power-on clear");

  initial begin
    if (D < 2) $error("bf2: D must be at least 2 (one row written, one cleared)");
  end
endmodule
