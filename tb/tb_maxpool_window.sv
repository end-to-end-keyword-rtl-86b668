// tb_maxpool_window -- self-checking test of the window MaxPool with
// timestamp propagation. Scripted windows exercise each closing rule:
//   A  notice first, then events, the last one carrying the notice's
//      timestamp                                   -> closed by that event;
//   B  the window's last event never arrives (filtered), a later event does
//                                                  -> closed by the later one,
//      which then counts for the next window;
//   C  notice after the events, upstream empty     -> closed by draining;
//   D  window without events                       -> zero vector;
//   F  two events share the last microsecond       -> the first does not close,
//      the second does;
//   G  the last events are merged before the notice arrives -> closed at once;
//   H  one of two last-microsecond events filtered -> closed by a later event;
// plus a stalled output (E). Pooled vectors (element-wise max), window numbers,
// vertex counts and causes are compared with values computed here.
module tb_maxpool_window;
  import kws_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, note_valid = 0, pipe_empty = 0, out_valid, out_ready = 1;
  cjob_t in = '0;
  winnote_t note = '0;
  fvec_t out_x;
  logic [WIN_W-1:0] out_win;
  logic [15:0] out_nev;
  logic [1:0] out_cause;
  int checks = 0, failures = 0;

  maxpool_window dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // expected window results
  typedef struct { int win; int nev; int cause; int mx [NF]; } exp_t;
  exp_t exp_q [$];
  int cur_mx [NF];
  int cur_n;

  task automatic clear_cur();
    for (int k = 0; k < NF; k++) cur_mx[k] = 0;
    cur_n = 0;
  endtask

  task automatic close_exp(input int win, input int cause);
    exp_t e;
    e.win = win; e.nev = cur_n; e.cause = cause; e.mx = cur_mx;
    exp_q.push_back(e);
    clear_cur();
  endtask

  task automatic send_ev(input int t, input bit count_it = 1'b1);
    @(negedge clk);
    in = '0;
    in.g.ev.t = TS_W'(t);
    for (int k = 0; k < NF; k++) in.x[k] = 8'($urandom % 128);
    in_valid = 1;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    if (count_it) begin
      for (int k = 0; k < NF; k++) if (int'(in.x[k]) > cur_mx[k]) cur_mx[k] = int'(in.x[k]);
      cur_n++;
    end
    #1 in_valid = 0;
  endtask

  task automatic send_note(input int win, input bit has, input int last, input int n = 1);
    @(negedge clk);
    note = '{win: WIN_W'(win), has_ev: has, last_ts: TS_W'(last), n_last: 8'(has ? n : 0)};
    note_valid = 1;
    @(negedge clk);
    note_valid = 0;
  endtask

  // output monitor
  int n_out = 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    exp_t e;
    n_out++;
    check(exp_q.size() > 0, "unexpected window");
    if (exp_q.size() > 0) begin
      e = exp_q.pop_front();
      check(int'(out_win) == e.win, "window number");
      check(int'(out_nev) == e.nev, "vertex count");
      check(int'(out_cause) == e.cause, "closing cause");
      for (int k = 0; k < NF; k++) check(int'(out_x[k]) == e.mx[k], "pooled feature");
    end
  end

  initial begin
    clear_cur();
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // A: notice pending, last event closes the window
    send_note(0, 1, 900);
    send_ev(100); send_ev(500); send_ev(900);
    close_exp(0, 0);
    repeat (5) @(posedge clk);
    // B: last event (1950) filtered away; event 2100 arrives later
    send_note(1, 1, 1950);
    send_ev(1200); send_ev(1500);
    close_exp(1, 1);
    send_ev(2100);           // belongs to window 2
    // C: notice after all events, pipeline empty
    send_ev(2500);
    repeat (3) @(posedge clk);
    send_note(2, 1, 2900);   // 2900 was filtered
    @(negedge clk) pipe_empty = 1;
    close_exp(2, 2);
    repeat (4) @(posedge clk);
    // D: empty window
    send_note(3, 0, 0);
    close_exp(3, 2);
    repeat (4) @(posedge clk);
    @(negedge clk) pipe_empty = 0;
    // E: output stalled while the next window's events come in
    out_ready = 0;
    send_note(4, 1, 4400);
    send_ev(4100); send_ev(4400);
    close_exp(4, 0);
    send_note(5, 1, 5300);
    send_ev(5200); send_ev(5300);
    close_exp(5, 0);
    repeat (6) @(posedge clk);
    check(out_valid, "output held while stalled");
    @(negedge clk) out_ready = 1;
    repeat (10) @(posedge clk);
    // F: two events share the last microsecond; the first must not close
    send_note(6, 1, 6600, 2);
    send_ev(6100); send_ev(6600);
    repeat (4) @(posedge clk);
    check(!out_valid && n_out == 6, "window open until all last-microsecond events are in");
    send_ev(6600);
    close_exp(6, 0);
    repeat (4) @(posedge clk);
    // G: the last events are merged before the notice arrives
    send_ev(7100); send_ev(7300); send_ev(7300); send_ev(7300);
    close_exp(7, 0);
    send_note(7, 1, 7300, 3);
    repeat (4) @(posedge clk);
    // H: one of two last-microsecond events filtered, a later event comes
    send_note(8, 1, 8800, 2);
    send_ev(8800);
    close_exp(8, 1);
    send_ev(9100);
    close_exp(9, 0);
    send_note(9, 1, 9100, 1);
    repeat (10) @(posedge clk);
    check(n_out == 10 && exp_q.size() == 0, "all windows delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
