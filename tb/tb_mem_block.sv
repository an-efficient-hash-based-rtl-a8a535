// tb_mem_block: random single-bit sets, word clears and word reads on a
// 512-bit block of 32-bit words, compared with a bit-array model; checks
// the one-cycle read latency and that a word clear zeroes all 32 bits.
module tb_mem_block;
  localparam int W = 512, WW = 32, NW = W / WW;
  logic clk = 0;
  logic [3:0]  rd_addr, clr_addr;
  logic [31:0] rd_data;
  logic        set_en, clr_en;
  logic [8:0]  set_idx;
  logic        model [W];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  mem_block #(.W(W), .WORD_W(WW)) dut (.*);

  function automatic logic [31:0] model_word(input int a);
    logic [31:0] v;
    for (int b = 0; b < WW; b++) v[b] = model[a * WW + b];
    return v;
  endfunction

  initial begin
    set_en = 0; clr_en = 0; rd_addr = 0; clr_addr = 0; set_idx = 0;
    // clear everything
    for (int a = 0; a < NW; a++) begin
      @(negedge clk); clr_en = 1; clr_addr = 4'(a);
    end
    @(negedge clk); clr_en = 0;
    foreach (model[i]) model[i] = 0;
    for (int n = 0; n < 2000; n++) begin
      int op;
      @(negedge clk);
      op = $urandom_range(0, 9);
      set_en = 0; clr_en = 0;
      if (op < 5) begin
        set_en = 1; set_idx = 9'($urandom);
      end else if (op == 5) begin
        clr_en = 1; clr_addr = 4'($urandom);
      end
      rd_addr = 4'($urandom);
      begin
        logic [31:0] expct;
        int ra;
        ra = rd_addr;
        expct = model_word(ra);   // read sees the word before this cycle's write
        @(posedge clk);
        if (set_en) model[set_idx] = 1;
        if (clr_en) for (int b = 0; b < WW; b++) model[clr_addr * WW + b] = 0;
        #1;
        checks++;
        if (rd_data !== expct) begin
          failures++;
          $display("FAIL read addr=%0d got=%h exp=%h", ra, rd_data, expct);
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
