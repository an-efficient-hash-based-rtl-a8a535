// tb_workload_driving: the filter at its default size (346 x 260 sensor,
// 32 KB, tau = 5 ms at 166 MHz) under a synthetic stream with the average
// event rate of a driving recording, about 1.1 M events/s: one event every
// 150 cycles on average (uniform gaps of 0..300 cycles).
//
// 90 % of the events come from a vertical edge, 220 pixels tall, that moves
// one column every 0.5 ms across the sensor, with one pixel of jitter; they
// are labelled signal. 10 % are uniformly random pixels, labelled noise
// (about 1.2 Hz per pixel). The run lasts 12 ms, more than two windows;
// only events after the first 5 ms are scored.
//
// Checks: no event lost (every accepted event gets a class, in order, 9
// cycles later), input never stalled for more than 9 cycles, at least 90 %
// of edge events kept and at least 85 % of noise events removed. The
// hash false-positive rate expected from n_row = rate x tau_row events per
// row, (1 - exp(-n_row/W))^K per row, is printed for reference.
module tb_workload_driving;
  import bf2_pkg::*;
  localparam int XS = 346, YS = 260;
  localparam int F_MHZ = 166, RUN_CYCLES = 12 * 1000 * F_MHZ, WARM = 5 * 1000 * F_MHZ;
  localparam int CYC_PER_COL = 500 * F_MHZ;   // edge moves one column per 0.5 ms

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_signal, row_clearing;
  dvs_event_t in_event = '0, out_event;
  logic [1:0] row_ptr;
  int checks = 0, failures = 0, cyc = 0;

  always #3 clk = ~clk;
  always @(negedge clk) cyc++;

  bf2_filter dut (.*);

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at cycle %0d", what, cyc); end
  endtask

  typedef struct { dvs_event_t ev; logic lab; logic scored; } lab_t;
  lab_t labq [$];
  int tp = 0, fn = 0, fp = 0, tn = 0, sent = 0, max_wait = 0, lost = 0;

  // scoreboard
  always @(negedge clk) if (rst_n && out_valid) begin
    lab_t l;
    if (labq.size() == 0) lost++;
    else begin
      l = labq.pop_front();
      if (out_event != l.ev) lost++;
      if (l.scored) begin
        if (l.lab &&  out_signal) tp++;
        if (l.lab && !out_signal) fn++;
        if (!l.lab &&  out_signal) fp++;
        if (!l.lab && !out_signal) tn++;
      end
    end
  end

  initial begin
    real tpr, fpr, nrow, fpr_row;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (!in_ready) @(negedge clk);
    while (cyc < RUN_CYCLES) begin
      dvs_event_t e;
      logic lab;
      int gap, w, col;
      gap = $urandom_range(0, 300);
      repeat (gap) @(negedge clk);
      col = 10 + (cyc / CYC_PER_COL) % (XS - 20);
      lab = ($urandom_range(0, 9) != 0);
      if (lab) begin
        e.x = 9'(col + $urandom_range(0, 2) - 1);
        e.y = 9'($urandom_range(20, 239));
      end else begin
        e.x = 9'($urandom_range(0, XS - 1));
        e.y = 9'($urandom_range(0, YS - 1));
      end
      e.t = 32'(cyc); e.p = 1'($urandom);
      in_valid = 1; in_event = e;
      w = 0;
      while (!in_ready) begin @(negedge clk); w++; end
      if (w > max_wait) max_wait = w;
      labq.push_back('{ev: e, lab: lab, scored: (cyc > WARM)});
      sent++;
      @(negedge clk);
      in_valid = 0;
    end
    repeat (20) @(negedge clk);
    tpr = real'(tp) / real'(tp + fn);
    fpr = real'(fp) / real'(fp + tn);
    nrow = real'(sent) / (real'(RUN_CYCLES) / 207500.0);
    fpr_row = (1.0 - $exp(-nrow / 16384.0)) ** 4;
    $display("events=%0d scored: TP=%0d FN=%0d FP=%0d TN=%0d  TPR=%0.3f FPR=%0.3f max_wait=%0d",
             sent, tp, fn, fp, tn, tpr, fpr, max_wait);
    $display("events per row=%0.0f, hash false-positive rate per row and search=%0.2e", nrow, fpr_row);
    chk(lost == 0, "every event classified in order");
    chk(labq.size() == 0, "no event left inside the filter");
    chk(max_wait <= 8, "input waits at most one event time");
    chk(tp + fn > 1000 && fp + tn > 100, "enough scored events");
    chk(tpr >= 0.90, "edge events kept");
    chk(fpr <= 0.15, "noise events removed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (RUN_CYCLES + 200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
