// tb_event_class: feeds groups of 8 search tags with random row outputs
// (dout one cycle after each tag) and random in-range flags, to instances
// with support thresholds 1 and 4. The class must equal "number of in-range
// searches with any row bit set >= threshold", reported in the cycle after
// the last search's dout.
module tb_event_class;
  localparam int D = 4;
  logic clk = 0, rst_n = 0;
  logic srch_valid = 0, srch_inrange = 0, srch_first = 0, srch_last = 0;
  logic [D-1:0] dout = '0;
  logic cv1, cs1, cv4, cs4;
  int checks = 0, failures = 0;
  int n_sig1 = 0, n_sig4 = 0;

  always #5 clk = ~clk;

  event_class #(.D(D), .SUPPORT_THR(1)) u1 (.clk, .rst_n, .srch_valid, .srch_inrange,
    .srch_first, .srch_last, .dout, .class_valid(cv1), .class_signal(cs1));
  event_class #(.D(D), .SUPPORT_THR(4)) u4 (.clk, .rst_n, .srch_valid, .srch_inrange,
    .srch_first, .srch_last, .dout, .class_valid(cv4), .class_signal(cs4));

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int e = 0; e < 300; e++) begin
      int supp;
      logic [D-1:0] dv [8];
      logic ir [8];
      int density;
      supp = 0;
      density = $urandom_range(1, 12);
      for (int s = 0; s < 8; s++) begin
        dv[s] = '0;
        for (int j = 0; j < D; j++) dv[s][j] = ($urandom_range(0, density * 4) == 0);
        ir[s] = ($urandom_range(0, 7) != 0);
        if (ir[s] && (dv[s] != 0)) supp++;
      end
      // 8 search cycles; dout of search s is presented in the next cycle
      for (int s = 0; s <= 8; s++) begin
        srch_valid = (s < 8); srch_first = (s == 0); srch_last = (s == 7);
        srch_inrange = (s < 8) ? ir[s] : 1'b0;
        dout = (s > 0) ? dv[s - 1] : 4'($urandom);
        @(negedge clk);
        if (s < 8) chk(!cv1 && !cv4, "no early class");
      end
      srch_valid = 0; srch_first = 0; srch_last = 0; dout = 4'($urandom);
      // class valid now: registered at the edge that took the last dout
      chk(cv1 && cs1 == (supp >= 1), "class thr1");
      chk(cv4 && cs4 == (supp >= 4), "class thr4");
      if (cs1) n_sig1++;
      if (cs4) n_sig4++;
      repeat ($urandom_range(0, 2)) begin
        @(negedge clk);
        chk(!cv1 && !cv4, "single pulse");
      end
    end
    chk(n_sig1 > 0 && n_sig1 < 300 && n_sig4 > 0 && n_sig4 < 300, "both classes seen");
    $display("signal with thr1=%0d thr4=%0d of 300", n_sig1, n_sig4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
