// tb_bf2_filter: end-to-end test of the BF2 noise filter.
//
// Two filters with W = 2048, D = 4, K = 4, 32-bit words and a row period of
// 400 cycles receive the same event stream: one with a support threshold
// of 1 (the plain OR) and one with 4. The stream mixes moving clusters of
// correlated events, isolated random noise, a hot pixel firing on its own,
// events on the sensor border, and idle gaps longer than the time window.
//
// A cycle-level reference model, independent of the RTL, predicts: the
// power-on clear time, the row pointer, the row clearing windows, the
// bit-exact content of the K x D x W arrays (reference H3 hashes), and so
// the class of every event for both thresholds, its latency (out_valid
// 9 cycles after acceptance) and the throughput (9 cycles per event when
// back to back). While a row is being cleared its bits may be half gone;
// an event whose class depends on that row is accepted either way.
//
// Each mechanism must occur: signal, noise, back-pressure, power-on clear,
// row advance with row wrap, support lost to row expiry, hot-pixel event
// rejected, off-sensor neighbours, the two thresholds disagreeing.
module tb_bf2_filter;
  import bf2_pkg::*;
  import bf2_tb_pkg::*;
  localparam int W = 2048, D = 4, K = 4, WW = 32, NW = W / WW, IW = 11;
  localparam int TAU = 400, XS = 346, YS = 260;
  localparam int N_EVENTS = 3000;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, rdy1, rdy4;
  dvs_event_t in_event = '0, oev1, oev4;
  logic ov1, ov4, os1, os4;
  logic [1:0] rp1, rp4;
  logic rc1, rc4;

  always #5 clk = ~clk;

  bf2_filter #(.W(W), .D(D), .K(K), .WORD_W(WW), .TAU_ROW_CYCLES(TAU), .SUPPORT_THR(1))
    dut1 (.clk, .rst_n, .in_valid, .in_ready(rdy1), .in_event, .out_valid(ov1),
          .out_event(oev1), .out_signal(os1), .row_ptr(rp1), .row_clearing(rc1));
  bf2_filter #(.W(W), .D(D), .K(K), .WORD_W(WW), .TAU_ROW_CYCLES(TAU), .SUPPORT_THR(4))
    dut4 (.clk, .rst_n, .in_valid, .in_ready(rdy4), .in_event, .out_valid(ov4),
          .out_event(oev4), .out_signal(os4), .row_ptr(rp4), .row_clearing(rc4));

  int checks = 0, failures = 0;
  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---------------- reference model ----------------
  logic model  [K][D][W];
  logic shadow [K][W];       // content of the row being cleared, before the clear
  int   amb_row = -1, amb_from = -1, amb_until = -1;
  int   last_ins [int];      // pixel key -> negedge of its last insertion

  function automatic int pkey(input int x, input int y);
    return y * 512 + x;
  endfunction

  function automatic logic in_row(input int j, input int x, input int y, input logic use_shadow);
    logic r;
    r = 1;
    for (int i = 0; i < K; i++)
      r &= (use_shadow && j == amb_row) ? (model[i][j][ref_idx(i, x, y, IW)] | shadow[i][ref_idx(i, x, y, IW)])
                                        : model[i][j][ref_idx(i, x, y, IW)];
    return r;
  endfunction

  // number of supporting neighbours (use_shadow: count the half-cleared row as full)
  function automatic int support(input int x, input int y, input logic use_shadow);
    int n;
    n = 0;
    for (int m = -1; m <= 1; m++)
      for (int q = -1; q <= 1; q++) begin
        logic s;
        if (m == 0 && q == 0) continue;
        if (x + m < 0 || x + m >= XS || y + q < 0 || y + q >= YS) continue;
        s = 0;
        for (int j = 0; j < D; j++) s |= in_row(j, x + m, y + q, use_shadow);
        if (s) n++;
      end
    return n;
  endfunction

  // ---------------- counters of mechanisms ----------------
  int n_sig = 0, n_noise = 0, n_bp = 0, n_adv = 0, n_wrap = 0, n_expired = 0, n_hot = 0;
  int n_border = 0, n_thr_differ = 0, n_amb = 0, n_b2b = 0, n_init_ok = 0;

  typedef struct { dvs_event_t ev; int ni; } pend_t;
  typedef struct { dvs_event_t ev; logic s1_lo, s1_hi, s4_lo, s4_hi; int due; } exp_t;
  pend_t pend [$];
  exp_t  expq [$];

  // ---------------- stimulus state ----------------
  int cx = 100, cy = 100, hot_x = 300, hot_y = 30;
  int sent = 0, done = 0, gap = 0;
  logic holding = 0;
  int last_acc = -100;

  function automatic dvs_event_t make_event(input int k);
    int kind, x, y;
    dvs_event_t e;
    kind = $urandom_range(0, 99);
    if (kind < 60) begin                      // cluster around a slowly moving centre
      x = cx + $urandom_range(0, 4) - 2; y = cy + $urandom_range(0, 4) - 2;
    end else if (kind < 85) begin             // isolated noise
      x = $urandom_range(0, XS - 1); y = $urandom_range(0, YS - 1);
    end else if (kind < 93) begin             // hot pixel
      x = hot_x; y = hot_y;
    end else begin                            // sensor border
      x = ($urandom_range(0, 1) == 0) ? 0 : XS - 1; y = $urandom_range(0, YS - 1);
    end
    if (x < 0) x = 0;
    if (x >= XS) x = XS - 1;
    if (y < 0) y = 0;
    if (y >= YS) y = YS - 1;
    e.x = 9'(x); e.y = 9'(y); e.t = 32'(k); e.p = 1'($urandom);
    return e;
  endfunction

  initial begin
    int k;
    for (int i = 0; i < K; i++) for (int j = 0; j < D; j++) for (int b = 0; b < W; b++) model[i][j][b] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    k = 0;                                    // negedges since reset release
    while (done < N_EVENTS) begin
      int row_exp;
      @(negedge clk);
      k++;
      // power-on clear and row pointer
      if (k < NW) begin
        chk(!rdy1 && !rdy4, "no input during power-on clear");
      end else if (k == NW) begin
        chk(rdy1 && rdy4, "ready after W/WORD_W cycles");
        n_init_ok++;
      end
      row_exp = (k < NW) ? 0 : ((k - NW) / TAU) % D;
      chk(rp1 == 2'(row_exp) && rp4 == 2'(row_exp), "row pointer");
      if (k > NW && (k - NW) % TAU == 0) begin
        int r;
        r = (row_exp + 1) % D;
        for (int i = 0; i < K; i++) for (int b = 0; b < W; b++) begin
          shadow[i][b] = model[i][r][b]; model[i][r][b] = 0;
        end
        amb_row = r; amb_from = k; amb_until = k + NW + 2;
        n_adv++;
        if (row_exp == 0) n_wrap++;
      end
      if (k > NW + TAU && (k - NW) % TAU == 1) chk(rc1 && rc4, "row clearing started");
      if (k > NW + TAU && (k - NW) % TAU == NW + 2) chk(!rc1 && !rc4, "row cleared in W/WORD_W cycles");
      // outputs
      if (expq.size() > 0 && expq[0].due == k) begin
        exp_t e;
        e = expq.pop_front();
        chk(ov1 && ov4, "out_valid 9 cycles after acceptance");
        chk(oev1 == e.ev && oev4 == e.ev, "out_event");
        if (e.s1_lo == e.s1_hi) chk(os1 == e.s1_lo, "class thr1");
        else chk(os1 == e.s1_lo || os1 == e.s1_hi, "class thr1 (row being cleared)");
        if (e.s4_lo == e.s4_hi) chk(os4 == e.s4_lo, "class thr4");
        else chk(os4 == e.s4_lo || os4 == e.s4_hi, "class thr4 (row being cleared)");
        if (os1) n_sig++; else n_noise++;
        if (os1 != os4) n_thr_differ++;
        done++;
      end else begin
        chk(!ov1 && !ov4, "no spurious out_valid");
      end
      // insert cycle of the oldest pending event: predict its class, then insert
      if (pend.size() > 0 && pend[0].ni == k) begin
        pend_t p;
        exp_t e;
        int x, y, lo, hi, amb;
        p = pend.pop_front();
        x = p.ev.x; y = p.ev.y;
        amb = (amb_row >= 0) && (k - 8 <= amb_until) && (k - 1 >= amb_from - 9);
        lo = support(x, y, 0);
        hi = amb ? support(x, y, 1) : lo;
        if (lo != hi) n_amb++;
        e.ev = p.ev; e.due = k + 1;
        e.s1_lo = (lo >= 1); e.s1_hi = (hi >= 1);
        e.s4_lo = (lo >= 4); e.s4_hi = (hi >= 4);
        expq.push_back(e);
        // mechanisms seen from the model
        if (hi == 0) begin
          int nb_old;
          nb_old = 0;
          for (int m = -1; m <= 1; m++) for (int q = -1; q <= 1; q++)
            if ((m != 0 || q != 0) && last_ins.exists(pkey(x + m, y + q))) nb_old = 1;
          if (nb_old) n_expired++;
          if (last_ins.exists(pkey(x, y)) && k - last_ins[pkey(x, y)] < TAU) n_hot++;
        end
        if (x == 0 || x == XS - 1 || y == 0 || y == YS - 1) n_border++;
        for (int i = 0; i < K; i++) model[i][row_exp][ref_idx(i, x, y, IW)] = 1;
        last_ins[pkey(x, y)] = k;
      end
      // stimulus
      if (!holding && sent < N_EVENTS) begin
        if (gap > 0) begin
          gap--;
          in_valid = 0;
        end else begin
          in_event = make_event(k);
          in_valid = 1;
          holding = 1;
          sent++;
          if ($urandom_range(0, 99) < 3) begin cx = $urandom_range(5, XS - 6); cy = $urandom_range(5, YS - 6); end
          if (sent % 400 == 0) gap = D * TAU + 50 + $urandom_range(0, 200);  // let the window expire
          else if ($urandom_range(0, 3) == 0) gap = $urandom_range(0, 30);
        end
      end else if (!holding) begin
        in_valid = 0;
      end
      if (in_valid && !rdy1 && k >= NW) n_bp++;
      chk(rdy1 == rdy4, "both filters in step");
      if (in_valid && rdy1) begin
        pend_t p;
        p.ev = in_event; p.ni = k + 9;
        pend.push_back(p);
        if (k - last_acc == 9) n_b2b++;
        chk(k - last_acc >= 9, "at most one event per 9 cycles");
        last_acc = k;
        holding = 0;
      end
    end
    $display("signal=%0d noise=%0d backpressure=%0d row_adv=%0d wraps=%0d expired=%0d hot=%0d border=%0d thr_differ=%0d ambiguous=%0d back_to_back=%0d",
             n_sig, n_noise, n_bp, n_adv, n_wrap, n_expired, n_hot, n_border, n_thr_differ, n_amb, n_b2b);
    chk(n_sig > 0, "mechanism: signal");
    chk(n_noise > 0, "mechanism: noise");
    chk(n_bp > 0, "mechanism: back-pressure");
    chk(n_init_ok == 1, "mechanism: power-on clear");
    chk(n_adv > 0 && n_wrap > 0, "mechanism: row advance and wrap");
    chk(n_expired > 0, "mechanism: support expired");
    chk(n_hot > 0, "mechanism: hot pixel rejected");
    chk(n_border > 0, "mechanism: border event");
    chk(n_thr_differ > 0, "mechanism: thresholds differ");
    chk(n_b2b > 0, "mechanism: back-to-back events at 9 cycles");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
