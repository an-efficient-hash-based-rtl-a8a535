// tb_bf2_filter_full: the BF2 noise filter at its default size (W = 16384,
// D = 4, K = 4, 32 KB; tau_row = 207500 cycles, i.e. tau = 5 ms at
// 166 MHz) taken through one complete operation: power-on clear, events
// classified in the first time bin, support found in an older bin after a
// row advance, and support lost once its row has been cleared three
// advances later. Expected classes are written by hand from the pixel
// positions; each event is sent alone and its result is expected exactly
// 9 cycles after it is accepted.
module tb_bf2_filter_full;
  import bf2_pkg::*;
  localparam int NW = 16384 / 32, TAU = 207500;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_signal, row_clearing;
  dvs_event_t in_event = '0, out_event;
  logic [1:0] row_ptr;
  int checks = 0, failures = 0, cyc = 0;

  always #3 clk = ~clk;
  always @(negedge clk) cyc++;

  bf2_filter dut (.*);

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at cycle %0d", what, cyc); end
  endtask

  task automatic send(input int x, input int y, input logic exp_sig, input string what);
    int c0;
    @(negedge clk);
    in_valid = 1; in_event = '{x: 9'(x), y: 9'(y), t: 32'(cyc), p: 1'b1};
    while (!in_ready) @(negedge clk);
    c0 = cyc;
    @(negedge clk);
    in_valid = 0;
    while (!out_valid && cyc < c0 + 20) @(negedge clk);
    // accepted at the rising edge after falling edge c0; out_valid is set by
    // the 9th rising edge after that, and seen at falling edge c0 + 10
    chk(cyc - c0 == 10, {what, ": latency 9 cycles"});
    chk(out_valid && out_event.x == 9'(x) && out_event.y == 9'(y), {what, ": event"});
    chk(out_signal == exp_sig, {what, ": class"});
  endtask

  task automatic wait_row(input int r);
    while (row_ptr != 2'(r)) @(negedge clk);
    @(negedge clk);
    chk(row_clearing, "row after the active one is being cleared");
    repeat (NW + 1) @(negedge clk);
    chk(!row_clearing, "row cleared within W/WORD_W cycles");
  endtask

  initial begin
    int c_rst;
    repeat (3) @(negedge clk);
    rst_n = 1;
    c_rst = cyc;
    while (!in_ready) @(negedge clk);
    chk(cyc - c_rst == NW, "power-on clear takes W/WORD_W cycles");
    chk(row_ptr == 0, "row 0 active");
    // first time bin
    send(100, 100, 0, "A isolated");
    send(101, 101, 1, "B next to A");
    send(200,  50, 0, "C isolated");
    send(200,  50, 0, "C again: own pixel is no support");
    send(  0,   0, 0, "D corner");
    send(  1,   0, 1, "E next to D on the border");
    // second time bin: B (row 0) still supports
    wait_row(1);
    send(102, 102, 1, "F next to B, one bin later");
    // advance to row 3: row 0 (A, B) is cleared, row 1 (F) stays
    wait_row(2);
    wait_row(3);
    send(101, 100, 0, "G next to A and B after their row was cleared");
    send(103, 103, 1, "H next to F, still in the window");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4 * TAU) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
