// event_class: decides signal or noise from the neighbour searches.
//
// For each of the 8 neighbour searches of an event, the D row outputs
// Dout(1..D) of the data structure are ORed: a 1 means the neighbour fired
// somewhere in the time window, i.e. it is a supporting event. The block
// counts the supporting neighbours of the event and, after the last search,
// declares the event signal (class_signal = 1) when the count reaches
// SUPPORT_THR. With the default SUPPORT_THR = 1 this is exactly an OR over
// all rows and all searches.
//
// Timing: the search tags (srch_valid, srch_inrange, srch_first,
// srch_last) are given in the cycle the search is issued; dout arrives one
// cycle later and is matched with the registered tags. class_valid is high
// for one cycle, the cycle after the last search's dout. A neighbour that
// lies outside the sensor (srch_inrange = 0) never counts.
//
// The OR over rows and over neighbours is the paper's. The support count
// with a threshold, and ignoring off-sensor neighbours, are this design's
// generalisation (a threshold of four is what the paper's accuracy study
// used; its hardware figure shows the plain OR).
module event_class #(
  parameter int unsigned D           = 4,
  parameter int unsigned SUPPORT_THR = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         srch_valid,
  input  logic         srch_inrange,
  input  logic         srch_first,
  input  logic         srch_last,
  input  logic [D-1:0] dout,
  output logic         class_valid,
  output logic         class_signal
);
  logic       v_q, inr_q, first_q, last_q;
  logic [3:0] cnt, cnt_next;
  logic       support;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v_q     <= 1'b0;
      inr_q   <= 1'b0;
      first_q <= 1'b0;
      last_q  <= 1'b0;
    end else begin
      v_q     <= srch_valid;
      inr_q   <= srch_inrange;
      first_q <= srch_first;
      last_q  <= srch_last;
    end
  end

  assign support  = inr_q && (|dout);
  assign cnt_next = (first_q ? 4'd0 : cnt) + {3'd0, support};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt          <= '0;
      class_valid  <= 1'b0;
      class_signal <= 1'b0;
    end else begin
      class_valid <= 1'b0;
      if (v_q) begin
        cnt <= cnt_next;
        if (last_q) begin
          class_valid  <= 1'b1;
          class_signal <= (cnt_next >= 4'(SUPPORT_THR));
        end
      end
    end
  end

  initial begin
    if (SUPPORT_THR < 1 || SUPPORT_THR > 8) $error("event_class: SUPPORT_THR must be 1..8");
  end
endmodule
