// tb_row_timer: TAU_ROW_CYCLES = 7, D = 4. row_adv must pulse every 7
// enabled cycles together with the new row pointer, which wraps 3 -> 0;
// counting stops while en is low.
module tb_row_timer;
  localparam int D = 4, TAU = 7;
  logic clk = 0, rst_n = 0, en = 0;
  logic [1:0] row_ptr;
  logic row_adv;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  row_timer #(.D(D), .TAU_ROW_CYCLES(TAU)) dut (.*);

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    int exp_row, cnt;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    chk(row_ptr == 0 && !row_adv, "reset state");
    // disabled: nothing moves
    repeat (20) begin @(negedge clk); chk(row_ptr == 0 && !row_adv, "disabled"); end
    en = 1;
    exp_row = 0; cnt = 0;
    for (int c = 0; c < TAU * 10; c++) begin
      @(negedge clk);
      cnt++;
      if (cnt == TAU) begin
        cnt = 0;
        exp_row = (exp_row + 1) % D;
        chk(row_adv && row_ptr == 2'(exp_row), "advance");
      end else begin
        chk(!row_adv && row_ptr == 2'(exp_row), "hold");
      end
      if (c == 30) begin
        en = 0;
        repeat (10) begin @(negedge clk); end
        chk(row_ptr == 2'(exp_row), "paused");
        en = 1;
      end
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
