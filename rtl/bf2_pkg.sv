// bf2_pkg: types and constants shared by the BF2 noise filter.
//
// An address-event (AER) packet from a dynamic vision sensor carries the
// pixel column x, the pixel row y, a timestamp t and a polarity p. The
// coordinate widths cover a 346 x 260 sensor (DAVIS346 class), the main
// sensor size of the design; the timestamp is 32 bits, the usual AER width.
// The filter never looks at t or p: it only carries them to the output.
package bf2_pkg;

  localparam int unsigned X_W = 9;   // column address width, 346 columns
  localparam int unsigned Y_W = 9;   // row address width, 260 rows
  localparam int unsigned T_W = 32;  // timestamp width

  typedef struct packed {
    logic [X_W-1:0] x;
    logic [Y_W-1:0] y;
    logic [T_W-1:0] t;
    logic           p;
  } dvs_event_t;

  // One step of the xorshift32 generator (shifts 13, 17, 5). Used at
  // elaboration time to fill the H3 hash matrices.
  function automatic logic [31:0] xorshift32(input logic [31:0] s);
    logic [31:0] v;
    v = s;
    v = v ^ (v << 13);
    v = v ^ (v >> 17);
    v = v ^ (v << 5);
    return v;
  endfunction

  // Row r of the H3 matrix of the hash with seed `seed`: the state is
  // seeded with seed*0x9E3779B9 + (r+1)*0x85EBCA6B (1 if that is zero),
  // stepped four times, and the last state is returned.
  function automatic logic [31:0] h3_row(input int unsigned seed, input int unsigned r);
    logic [31:0] s;
    s = 32'(seed) * 32'h9E37_79B9 + 32'(r + 1) * 32'h85EB_CA6B;
    if (s == 32'd0) s = 32'd1;
    for (int i = 0; i < 4; i++) s = xorshift32(s);
    return s;
  endfunction

endpackage
