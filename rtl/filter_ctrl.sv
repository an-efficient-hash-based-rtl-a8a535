// filter_ctrl: control logic of the BF2 noise filter.
//
// For every incoming event the controller
//   1. searches the data structure for the 8 pixels around it, one search
//      per cycle (8 cycles), in the order m = -1..1 (x offset, outer),
//      n = -1..1 (y offset, inner), skipping the pixel itself so that a
//      hot pixel cannot support its own events;
//   2. then inserts the event itself into the active row (1 cycle).
// So an event takes 9 cycles and the filter takes one event every 9 cycles.
// A new event is accepted in the insert cycle of the previous one, so back
// to back events keep the data structure busy every cycle.
//
// Handshake: in_event is taken when in_valid && in_ready. in_ready is low
// during the power-on clear (init_busy) and during the 8 search cycles.
// The controller drives the data structure with op_valid/op_write/key and
// tags each search for event_class (inrange: the neighbour lies on the
// X_SIZE x Y_SIZE sensor; first/last: first and last search of the event).
// out_event holds the event whose class event_class reports; it is
// updated in the insert cycle, so it is valid together with class_valid.
//
// The 8+1 cycle schedule and the neighbour search are the paper's; the
// valid/ready handshake, search order and off-sensor handling are this
// design's.
module filter_ctrl
  import bf2_pkg::*;
#(
  parameter int unsigned X_SIZE = 346,
  parameter int unsigned Y_SIZE = 260
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           init_busy,
  input  logic           in_valid,
  output logic           in_ready,
  input  dvs_event_t     in_event,
  output logic           op_valid,
  output logic           op_write,
  output logic [X_W-1:0] key_x,
  output logic [Y_W-1:0] key_y,
  output logic           srch_valid,
  output logic           srch_inrange,
  output logic           srch_first,
  output logic           srch_last,
  output dvs_event_t     out_event
);
  typedef enum logic [1:0] {S_IDLE, S_SEARCH, S_INSERT} state_t;

  state_t     state;
  logic [2:0] step;
  dvs_event_t cur;
  logic       accept;

  // Neighbour offsets of search `s`: 0..7 -> (m,n) over -1..1 without (0,0)
  function automatic logic [1:0] offs_m(input logic [2:0] s);  // x offset + 1
    return (s < 3'd3) ? 2'd0 : (s < 3'd5) ? 2'd1 : 2'd2;
  endfunction
  function automatic logic [1:0] offs_n(input logic [2:0] s);  // y offset + 1
    case (s)
      3'd0, 3'd3, 3'd5: return 2'd0;
      3'd1, 3'd6:       return 2'd1;
      default:          return 2'd2;
    endcase
  endfunction

  logic [X_W:0] nx;   // x + m + 1, one bit wider, never negative
  logic [Y_W:0] ny;   // y + n + 1

  assign in_ready = !init_busy && (state != S_SEARCH);
  assign accept   = in_valid && in_ready;

  always_comb begin
    nx = {1'b0, cur.x} + (X_W + 1)'(offs_m(step));
    ny = {1'b0, cur.y} + (Y_W + 1)'(offs_n(step));
  end

  always_comb begin
    op_valid     = (state != S_IDLE);
    op_write     = (state == S_INSERT);
    srch_valid   = (state == S_SEARCH);
    srch_first   = srch_valid && (step == 3'd0);
    srch_last    = srch_valid && (step == 3'd7);
    srch_inrange = (nx >= (X_W + 1)'(1)) && (nx <= (X_W + 1)'(X_SIZE)) &&
                   (ny >= (Y_W + 1)'(1)) && (ny <= (Y_W + 1)'(Y_SIZE));
    if (state == S_SEARCH) begin
      key_x = X_W'(nx - 1'b1);
      key_y = Y_W'(ny - 1'b1);
    end else begin
      key_x = cur.x;
      key_y = cur.y;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      step      <= '0;
      cur       <= '0;
      out_event <= '0;
    end else begin
      case (state)
        S_SEARCH: begin
          step <= step + 1'b1;
          if (step == 3'd7) state <= S_INSERT;
        end
        S_INSERT: begin
          out_event <= cur;
          state     <= accept ? S_SEARCH : S_IDLE;
        end
        default: state <= accept ? S_SEARCH : S_IDLE;
      endcase
      if (accept) begin
        cur  <= in_event;
        step <= '0;
      end
    end
  end

  a_stable_while_waiting: assert property (@(posedge clk) disable iff (!rst_n)
                                           in_valid && !in_ready |=> in_valid && $stable(in_event))
    else $error("filter_ctrl: in_event changed or was withdrawn before it was accepted");
endmodule
