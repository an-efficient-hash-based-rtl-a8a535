// tb_row_clear: 4 rows of 8 words. Checks the power-on clear (all rows,
// words 0..7 in order, init_busy for exactly 8 cycles), then for each row
// advance that the row after the new active row is cleared word by word in
// 8 cycles and that nothing is cleared otherwise.
module tb_row_clear;
  localparam int W = 256, D = 4, WW = 32, NW = W / WW;
  logic clk = 0, rst_n = 0;
  logic [1:0] row_ptr = 0;
  logic       row_adv = 0;
  logic [D-1:0] clr_rows;
  logic [2:0] clr_addr;
  logic busy, init_busy;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  row_clear #(.W(W), .D(D), .WORD_W(WW)) dut (.*);

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int a = 0; a < NW; a++) begin
      chk(init_busy && clr_rows == '1 && clr_addr == 3'(a), "init clear word");
      @(negedge clk);
    end
    chk(!init_busy && !busy && clr_rows == '0, "init done");
    for (int r = 1; r <= 6; r++) begin
      repeat (3) begin
        @(negedge clk);
        chk(clr_rows == '0, "idle: no clear");
      end
      row_ptr = 2'(r % D); row_adv = 1;
      @(negedge clk); row_adv = 0;
      for (int a = 0; a < NW; a++) begin
        chk(busy && clr_rows == (4'b1 << ((r + 1) % D)) && clr_addr == 3'(a), "row clear word");
        @(negedge clk);
      end
      chk(!busy && clr_rows == '0, "row clear done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
