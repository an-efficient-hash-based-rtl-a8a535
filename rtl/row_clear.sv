// row_clear: clears the oldest row of the BF2 arrays while the active row
// is being written.
//
// When the row pointer advances (row_adv, with the new row_ptr), the row
// after the active one, (row_ptr+1) mod D, holds the oldest events. This
// block zeroes it one word per cycle, words 0 .. W/WORD_W-1, driving
// clr_rows (one-hot row) and clr_addr to every array; it takes W/WORD_W
// cycles, which must fit in one row period (checked in bf2 and by an
// assertion here: a new row_adv must not arrive while clearing).
//
// After reset the memory content is undefined, so the block first clears
// all D rows in parallel (clr_rows all ones) for W/WORD_W cycles and holds
// init_busy high meanwhile; the filter accepts no events until it drops.
//
// Clearing the next row while the current one is written ("Method 2") is
// the paper's; the power-on clear is this design's.
module row_clear #(
  parameter int unsigned W      = 16384,
  parameter int unsigned D      = 4,
  parameter int unsigned WORD_W = 32,
  localparam int unsigned NWORDS = W / WORD_W,
  localparam int unsigned AW     = $clog2(NWORDS),
  localparam int unsigned RW     = (D > 1) ? $clog2(D) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [RW-1:0] row_ptr,
  input  logic          row_adv,
  output logic [D-1:0]  clr_rows,
  output logic [AW-1:0] clr_addr,
  output logic          busy,
  output logic          init_busy
);
  logic [RW-1:0] tgt_row;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy      <= 1'b1;
      init_busy <= 1'b1;
      clr_addr  <= '0;
      tgt_row   <= '0;
    end else if (row_adv) begin
      busy     <= 1'b1;
      clr_addr <= '0;
      tgt_row  <= (row_ptr == RW'(D - 1)) ? '0 : row_ptr + 1'b1;
    end else if (busy) begin
      clr_addr <= clr_addr + 1'b1;
      if (clr_addr == AW'(NWORDS - 1)) begin
        busy      <= 1'b0;
        init_busy <= 1'b0;
      end
    end
  end

  always_comb begin
    clr_rows = '0;
    if (init_busy)
      clr_rows = '1;
    else if (busy)
      clr_rows[tgt_row] = 1'b1;
  end

  a_clear_in_time: assert property (@(posedge clk) disable iff (!rst_n)
                                    row_adv |-> !busy)
    else $error("row_clear: row pointer advanced before the previous clear finished");
endmodule
