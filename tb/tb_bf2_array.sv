// tb_bf2_array: one BF2 array of 4 rows x 256 bits (32-bit words). Random
// sets into a chosen row, clears of a word in a set of rows, and parallel
// reads of all rows, compared with a per-row bit model.
module tb_bf2_array;
  localparam int W = 256, D = 4, WW = 32, NW = W / WW;
  logic clk = 0;
  logic [2:0]  rd_addr, clr_addr;
  logic [31:0] rd_words [D];
  logic        set_en;
  logic [1:0]  set_row;
  logic [7:0]  set_idx;
  logic [D-1:0] clr_rows;
  logic        model [D][W];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  bf2_array #(.W(W), .D(D), .WORD_W(WW)) dut (.*);

  initial begin
    set_en = 0; clr_rows = '0; rd_addr = 0; clr_addr = 0; set_row = 0; set_idx = 0;
    for (int a = 0; a < NW; a++) begin
      @(negedge clk); clr_rows = '1; clr_addr = 3'(a);
    end
    @(negedge clk); clr_rows = '0;
    for (int j = 0; j < D; j++) for (int b = 0; b < W; b++) model[j][b] = 0;
    for (int n = 0; n < 2000; n++) begin
      logic [31:0] expct [D];
      @(negedge clk);
      set_en = ($urandom_range(0, 1) == 1);
      set_row = 2'($urandom); set_idx = 8'($urandom);
      clr_rows = ($urandom_range(0, 7) == 0) ? 4'($urandom) : 4'd0;
      if (set_en) clr_rows[set_row] = 1'b0;
      clr_addr = 3'($urandom);
      rd_addr = 3'($urandom);
      for (int j = 0; j < D; j++)
        for (int b = 0; b < WW; b++) expct[j][b] = model[j][rd_addr * WW + b];
      @(posedge clk);
      if (set_en) model[set_row][set_idx] = 1;
      for (int j = 0; j < D; j++)
        if (clr_rows[j]) for (int b = 0; b < WW; b++) model[j][clr_addr * WW + b] = 0;
      #1;
      for (int j = 0; j < D; j++) begin
        checks++;
        if (rd_words[j] !== expct[j]) begin
          failures++;
          $display("FAIL row %0d got %h exp %h", j, rd_words[j], expct[j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
