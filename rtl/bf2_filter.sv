// bf2_filter: background-activity noise filter for event cameras built on
// the BF2 hashed time-binned data structure (top level).
//
// A DVS event is kept (signal) when one of its 8 neighbouring pixels fired
// within the last tau = D x tau_row; otherwise it is noise. Instead of a
// timestamp per pixel, past events are kept in K hashed bit arrays of
// D rows x W bits, one row per time bin, the oldest row being cleared as
// the window slides.
//
// Blocks: filter_ctrl (event handshake, 8 neighbour searches, insert),
// row_timer (RowPtr), bf2 (hashes, arrays, bit select, row AND gates, row
// clearing) and event_class (OR over rows and neighbours -> EventClass).
//
// Interface: in_valid/in_ready/in_event take AER events (x,y,t,p); t and p
// are carried, not used. out_valid pulses once per event with out_event
// and out_signal (1 = signal, 0 = noise). There is no output back-pressure.
// row_ptr and row_clearing show the active row and whether the row after
// it is still being cleared.
// After reset the filter clears its memory for W/WORD_W cycles (in_ready
// low). Throughput is one event per 9 cycles, latency 9 cycles from the
// accepting clock edge to out_valid.
//
// Defaults: W = 16384, D = 4, K = 4 (32 KB, the paper's FPGA
// configuration) and tau = 5 ms at a 166 MHz clock; WORD_W = 32 is this
// design's choice.
module bf2_filter
  import bf2_pkg::*;
#(
  parameter int unsigned W              = 16384,
  parameter int unsigned D              = 4,
  parameter int unsigned K              = 4,
  parameter int unsigned WORD_W         = 32,
  parameter int unsigned TAU_ROW_CYCLES = 207500,
  parameter int unsigned SUPPORT_THR    = 1,
  parameter int unsigned X_SIZE         = 346,
  parameter int unsigned Y_SIZE         = 260,
  localparam int unsigned RW            = (D > 1) ? $clog2(D) : 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  dvs_event_t  in_event,
  output logic        out_valid,
  output dvs_event_t  out_event,
  output logic        out_signal,
  output logic [RW-1:0] row_ptr,
  output logic        row_clearing
);
  logic           init_busy, row_adv;
  logic           op_valid, op_write;
  logic [X_W-1:0] key_x;
  logic [Y_W-1:0] key_y;
  logic           srch_valid, srch_inrange, srch_first, srch_last;
  logic [D-1:0]   dout;
  logic           dout_valid;

  row_timer #(.D(D), .TAU_ROW_CYCLES(TAU_ROW_CYCLES)) u_timer (
    .clk    (clk),
    .rst_n  (rst_n),
    .en     (!init_busy),
    .row_ptr(row_ptr),
    .row_adv(row_adv)
  );

  filter_ctrl #(.X_SIZE(X_SIZE), .Y_SIZE(Y_SIZE)) u_ctrl (
    .clk         (clk),
    .rst_n       (rst_n),
    .init_busy   (init_busy),
    .in_valid    (in_valid),
    .in_ready    (in_ready),
    .in_event    (in_event),
    .op_valid    (op_valid),
    .op_write    (op_write),
    .key_x       (key_x),
    .key_y       (key_y),
    .srch_valid  (srch_valid),
    .srch_inrange(srch_inrange),
    .srch_first  (srch_first),
    .srch_last   (srch_last),
    .out_event   (out_event)
  );

  bf2 #(.W(W), .D(D), .K(K), .WORD_W(WORD_W)) u_bf2 (
    .clk       (clk),
    .rst_n     (rst_n),
    .op_valid  (op_valid),
    .op_write  (op_write),
    .key_x     (key_x),
    .key_y     (key_y),
    .row_ptr   (row_ptr),
    .row_adv   (row_adv),
    .dout      (dout),
    .dout_valid(dout_valid),
    .init_busy (init_busy),
    .clr_busy  (row_clearing)
  );

  event_class #(.D(D), .SUPPORT_THR(SUPPORT_THR)) u_class (
    .clk         (clk),
    .rst_n       (rst_n),
    .srch_valid  (srch_valid),
    .srch_inrange(srch_inrange),
    .srch_first  (srch_first),
    .srch_last   (srch_last),
    .dout        (dout),
    .class_valid (out_valid),
    .class_signal(out_signal)
  );

  a_dout_aligned: assert property (@(posedge clk) disable iff (!rst_n)
                                   srch_valid |=> dout_valid)
    else $error("bf2_filter: search result not returned one cycle after the search");

  initial begin
    if (TAU_ROW_CYCLES <= W / WORD_W)
      $error("bf2_filter: a row must be cleared within one row period (TAU_ROW_CYCLES > W/WORD_W)");
    if (X_SIZE > (1 << X_W) || Y_SIZE > (1 << Y_W))
      $error("bf2_filter: sensor larger than the event coordinate widths");
  end
endmodule
