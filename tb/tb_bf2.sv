// tb_bf2: the BF2 data structure with W = 1024, D = 4, K = 4, 32-bit words.
// A bit-level reference model (K x D x W bits, hashed with the reference
// H3) receives the same inserts; every search must return, one cycle
// later, Dout(j) = AND over the K arrays of the addressed bit of row j.
// The testbench drives the row pointer itself: after each advance the row
// after the new active row must be cleared within W/32 cycles (searches
// made while it is cleared are checked on the other rows only), and the
// data of the cleared row must be gone while the other rows keep theirs.
module tb_bf2;
  import bf2_pkg::*;
  import bf2_tb_pkg::*;
  localparam int W = 1024, D = 4, K = 4, WW = 32, IW = 10, NW = W / WW;
  logic clk = 0, rst_n = 0;
  logic op_valid = 0, op_write = 0;
  logic [8:0] key_x = 0, key_y = 0;
  logic [1:0] row_ptr = 0;
  logic row_adv = 0;
  logic [D-1:0] dout;
  logic dout_valid, init_busy, clr_busy;
  logic model [K][D][W];
  int checks = 0, failures = 0, hits = 0, clears = 0;
  int px [40], py [40];

  always #5 clk = ~clk;

  bf2 #(.W(W), .D(D), .K(K), .WORD_W(WW)) dut (.*);

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic logic [D-1:0] model_search(input int x, input int y);
    logic [D-1:0] r;
    for (int j = 0; j < D; j++) begin
      r[j] = 1;
      for (int i = 0; i < K; i++) r[j] &= model[i][j][ref_idx(i, x, y, IW)];
    end
    return r;
  endfunction

  task automatic do_insert(input int x, input int y);
    @(negedge clk);
    op_valid = 1; op_write = 1; key_x = 9'(x); key_y = 9'(y);
    @(posedge clk);
    for (int i = 0; i < K; i++) model[i][row_ptr][ref_idx(i, x, y, IW)] = 1;
  endtask

  task automatic do_search(input int x, input int y, input int skip_row);
    logic [D-1:0] e;
    @(negedge clk);
    op_valid = 1; op_write = 0; key_x = 9'(x); key_y = 9'(y);
    e = model_search(x, y);
    @(negedge clk);
    op_valid = 0;
    chk(dout_valid, "dout_valid");
    for (int j = 0; j < D; j++) if (j != skip_row) chk(dout[j] == e[j], "dout row");
    if (dout != 0) hits++;
  endtask

  initial begin
    for (int n = 0; n < 40; n++) begin px[n] = $urandom_range(0, 345); py[n] = $urandom_range(0, 259); end
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    chk(init_busy, "init clear after reset");
    repeat (NW) @(negedge clk);
    chk(!init_busy && !clr_busy, "init clear takes W/WORD_W cycles");
    for (int i = 0; i < K; i++) for (int j = 0; j < D; j++) for (int b = 0; b < W; b++) model[i][j][b] = 0;
    for (int r = 0; r < 9; r++) begin
      // a burst of inserts and searches in this row period
      for (int n = 0; n < 60; n++) begin
        int k;
        k = $urandom_range(0, 39);
        if ($urandom_range(0, 2) == 0) do_insert(px[k], py[k]);
        else do_search(px[k], py[k], clr_busy ? (int'(row_ptr) + 1) % D : -1);
      end
      @(negedge clk); op_valid = 0;
      while (clr_busy) @(negedge clk);
      // advance the row pointer; the next row must be cleared
      row_ptr = 2'((r + 1) % D); row_adv = 1;
      @(negedge clk); row_adv = 0;
      chk(clr_busy, "clearing started");
      begin
        int cyc;
        cyc = 0;
        while (clr_busy) begin
          // keep searching while the clear runs (other rows must be intact)
          int k;
          k = $urandom_range(0, 39);
          do_search(px[k], py[k], (int'(row_ptr) + 1) % D);
          cyc += 2;
        end
        chk(cyc <= NW + 2, "clear within W/WORD_W cycles");
      end
      clears++;
      for (int i = 0; i < K; i++) for (int b = 0; b < W; b++) model[i][(r + 2) % D][b] = 0;
      for (int k = 0; k < 40; k++) begin
        do_search(px[k], py[k], -1);
        chk(dout[(r + 2) % D] == 0, "cleared row is empty");
      end
    end
    chk(hits > 50, "searches found stored events");
    $display("hits=%0d clears=%0d", hits, clears);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
