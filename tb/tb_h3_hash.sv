// tb_h3_hash: checks the H3 hash unit against a reference H3 computed from
// its definition, for the 14-bit and a 10-bit index width and two seeds,
// and checks the H3 linearity h(a^b) = h(a)^h(b) and h(0) = 0.
module tb_h3_hash;
  import bf2_tb_pkg::*;

  logic [17:0] key;
  logic [13:0] idx_a, idx_b;
  logic [9:0]  idx_c;
  int checks = 0, failures = 0;

  h3_hash #(.KEY_W(18), .OUT_W(14), .SEED(1)) u_a (.key(key), .idx(idx_a));
  h3_hash #(.KEY_W(18), .OUT_W(14), .SEED(3)) u_b (.key(key), .idx(idx_b));
  h3_hash #(.KEY_W(18), .OUT_W(10), .SEED(2)) u_c (.key(key), .idx(idx_c));

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s key=%h", what, key); end
  endtask

  initial begin
    logic [13:0] ha, hb;
    logic [17:0] ka, kb;
    key = '0; #1;
    chk(idx_a == 0 && idx_b == 0 && idx_c == 0, "h(0)=0");
    for (int n = 0; n < 300; n++) begin
      key = 18'($urandom); #1;
      chk(idx_a == 14'(ref_h3(1, key, 18, 14)), "seed1");
      chk(idx_b == 14'(ref_h3(3, key, 18, 14)), "seed3");
      chk(idx_c == 10'(ref_h3(2, key, 18, 10)), "seed2 w10");
    end
    for (int n = 0; n < 50; n++) begin
      ka = 18'($urandom); kb = 18'($urandom);
      key = ka; #1; ha = idx_a;
      key = kb; #1; hb = idx_a;
      key = ka ^ kb; #1;
      chk(idx_a == (ha ^ hb), "linearity");
    end
    // Neighbouring pixels must not collide in all hashes at once
    key = {9'd100, 9'd100}; #1; ha = idx_a;
    key = {9'd100, 9'd101}; #1;
    chk(idx_a != ha, "neighbours differ");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
