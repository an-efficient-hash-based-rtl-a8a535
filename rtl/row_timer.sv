// row_timer: the row pointer (RowPtr) of the BF2 data structure.
//
// Each row of the arrays is a time bin of tau_row = tau / D. The timer
// counts clock cycles while en is high and, every TAU_ROW_CYCLES cycles,
// advances row_ptr by one, wrapping from D-1 to 0. row_adv is high for the
// one cycle in which row_ptr first shows its new value. The counter is the
// only arithmetic in the filter.
//
// Timing bins measured in clock cycles, not from the event timestamps,
// follow the paper's hardware description (the timestamp is not used and
// RowPtr is updated on the filter clock). The default, 207500 cycles, is
// tau = 5 ms split over D = 4 rows at a 166 MHz clock. Rows are numbered
// 0..D-1 here.
module row_timer #(
  parameter int unsigned D              = 4,
  parameter int unsigned TAU_ROW_CYCLES = 207500,
  localparam int unsigned RW            = (D > 1) ? $clog2(D) : 1,
  localparam int unsigned CW            = $clog2(TAU_ROW_CYCLES)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  output logic [RW-1:0] row_ptr,
  output logic          row_adv
);
  logic [CW-1:0] cnt;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt     <= '0;
      row_ptr <= '0;
      row_adv <= 1'b0;
    end else begin
      row_adv <= 1'b0;
      if (en) begin
        if (cnt == CW'(TAU_ROW_CYCLES - 1)) begin
          cnt     <= '0;
          row_ptr <= (row_ptr == RW'(D - 1)) ? '0 : row_ptr + 1'b1;
          row_adv <= 1'b1;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end

  initial begin
    if (TAU_ROW_CYCLES < 2) $error("row_timer: TAU_ROW_CYCLES must be at least 2");
  end
endmodule
