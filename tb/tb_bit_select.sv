// tb_bit_select: random words and offsets; each output bit must equal the
// addressed bit of the word of the same hash and row.
module tb_bit_select;
  localparam int D = 4, K = 3, WW = 32;
  logic [WW-1:0] words [K][D];
  logic [4:0]    offs  [K];
  logic [K-1:0]  bits  [D];
  int checks = 0, failures = 0;

  bit_select #(.D(D), .K(K), .WORD_W(WW)) dut (.*);

  initial begin
    for (int n = 0; n < 500; n++) begin
      for (int i = 0; i < K; i++) begin
        offs[i] = 5'($urandom);
        for (int j = 0; j < D; j++) words[i][j] = $urandom;
      end
      #1;
      for (int j = 0; j < D; j++)
        for (int i = 0; i < K; i++) begin
          checks++;
          if (bits[j][i] !== ((words[i][j] >> offs[i]) & 1)) begin
            failures++;
            $display("FAIL row %0d hash %0d", j, i);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
