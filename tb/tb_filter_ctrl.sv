// tb_filter_ctrl: sends events (random and at the sensor corners) with
// random gaps and back-to-back. Checks: no acceptance during init_busy;
// for each event 8 search cycles with keys at the 8 neighbours in order
// (-1,-1),(-1,0),(-1,1),(0,-1),(0,1),(1,-1),(1,0),(1,1), correct in-range
// flags and first/last tags, then one insert cycle with the event's own
// address; in_ready low during searches; 9 cycles per event back to back;
// out_event updated with the event after its insert cycle.
module tb_filter_ctrl;
  import bf2_pkg::*;
  localparam int XS = 346, YS = 260;
  logic clk = 0, rst_n = 0, init_busy = 1;
  logic in_valid = 0, in_ready;
  dvs_event_t in_event = '0, out_event;
  logic op_valid, op_write;
  logic [8:0] key_x, key_y;
  logic srch_valid, srch_inrange, srch_first, srch_last;
  int checks = 0, failures = 0;
  int dm [8] = '{-1, -1, -1, 0, 0, 1, 1, 1};
  int dn [8] = '{-1, 0, 1, -1, 1, -1, 0, 1};
  dvs_event_t q [$];
  time accept_t [$];

  always #5 clk = ~clk;

  filter_ctrl #(.X_SIZE(XS), .Y_SIZE(YS)) dut (.*);

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // Driver: in_ready is sampled at the falling edge before each rising edge
  initial begin
    time last_t;
    last_t = 0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    in_valid = 0;
    repeat (10) begin @(negedge clk); chk(!in_ready, "not ready during init"); end
    init_busy = 0;
    for (int e = 0; e < 200; e++) begin
      dvs_event_t ev;
      logic rdy;
      case (e % 5)
        0: ev = '{x: 9'd0, y: 9'd0, t: 32'(e), p: 1'b0};
        1: ev = '{x: 9'(XS - 1), y: 9'(YS - 1), t: 32'(e), p: 1'b1};
        default: ev = '{x: 9'($urandom_range(0, XS - 1)), y: 9'($urandom_range(0, YS - 1)),
                        t: $urandom, p: 1'($urandom)};
      endcase
      in_valid = 1; in_event = ev;
      rdy = in_ready;
      @(posedge clk);
      while (!rdy) begin
        @(negedge clk); rdy = in_ready; @(posedge clk);
      end
      q.push_back(ev);
      accept_t.push_back($time);
      if (e > 0 && e <= 100) begin
        checks++;
        if ($time - last_t != 90) begin failures++; $display("FAIL accept gap %0t", $time - last_t); end
      end
      last_t = $time;
      @(negedge clk);
      in_valid = 0;
      if (e > 100 && $urandom_range(0, 1)) repeat ($urandom_range(1, 12)) @(negedge clk);
    end
  end

  // Monitor: checks the operation sequence of each accepted event
  initial begin
    int n_done = 0;
    wait (rst_n);
    while (n_done < 200) begin
      dvs_event_t ev;
      time t0;
      wait (q.size() > 0);
      ev = q.pop_front();
      t0 = accept_t.pop_front();
      @(negedge clk);
      chk($time == t0 + 5, "search starts right after accept");
      for (int s = 0; s < 8; s++) begin
        int nx, ny;
        logic inr;
        nx = int'(ev.x) + dm[s]; ny = int'(ev.y) + dn[s];
        inr = (nx >= 0 && nx < XS && ny >= 0 && ny < YS);
        chk(op_valid && !op_write && srch_valid, "search op");
        chk(srch_first == (s == 0) && srch_last == (s == 7), "first/last");
        chk(srch_inrange == inr, "inrange");
        if (inr) chk(key_x == 9'(nx) && key_y == 9'(ny), "neighbour key");
        chk(!in_ready, "busy while searching");
        @(negedge clk);
      end
      chk(op_valid && op_write && !srch_valid, "insert op");
      chk(key_x == ev.x && key_y == ev.y, "insert key");
      chk(in_ready, "ready in insert cycle");
      fork
        automatic dvs_event_t evc = ev;
        begin
          @(negedge clk);
          chk(out_event == evc, "out_event");
        end
      join_none
      n_done++;
    end
    @(negedge clk); @(negedge clk);
    chk(!op_valid, "idle at the end");
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
