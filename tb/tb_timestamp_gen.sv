// tb_timestamp_gen -- self-checking test of AER reception, timestamping and
// window-end notices. The testbench counts clock cycles itself: the cycle
// in which an event is taken fixes its expected timestamp (cycles / 16 at
// CLK_PER_US = 16), and every WINDOW_US * CLK_PER_US cycles a notice with the
// last expected timestamp of the window and the number of events stamped in
// that microsecond must appear (several events often share a microsecond). The four-phase
// handshake is driven as a sensor would, and the time from request to
// acknowledge is checked against the two-flop synchroniser latency.
module tb_timestamp_gen;
  import kws_pkg::*;
  localparam int CPU = 16, WUS = 20;
  logic clk = 0, rst_n = 0;
  logic aer_req = 0, aer_ack;
  logic [CH_W:0] aer_addr = '0;
  logic ev_valid, note_valid;
  event_t ev;
  winnote_t note;
  logic [TS_W-1:0] now_us;
  int checks = 0, failures = 0;
  longint cyc = 0;
  longint exp_ts [$];
  logic [CH_W:0] exp_addr [$];
  longint last_in_win [longint];
  int     cnt_in_win [longint];
  int n_notes = 0, n_empty = 0, n_ev = 0, n_multi = 0;

  timestamp_gen #(.CLK_PER_US(CPU), .WINDOW_US(WUS)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  // cycle counter and monitors
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
  end

  always @(negedge clk) if (rst_n) begin
    if (ev_valid) begin
      longint t;
      t = (cyc - 1) / CPU;           // taken at posedge number cyc
      n_ev++;
      check(exp_addr.size() > 0, "unexpected event");
      if (exp_addr.size() > 0) begin
        logic [CH_W:0] a;
        a = exp_addr.pop_front();
        check(ev.c == a[CH_W:1] && ev.p == a[0], "address");
      end
      check(ev.t == TS_W'(t), "timestamp");
      if (last_in_win.exists(t / WUS) && last_in_win[t / WUS] == t) cnt_in_win[t / WUS]++;
      else cnt_in_win[t / WUS] = 1;
      last_in_win[t / WUS] = t;
    end
    if (note_valid) begin
      longint w;
      w = (cyc / (CPU * WUS)) - 1;
      n_notes++;
      check(cyc % (CPU * WUS) == 0, "notice timing");
      check(note.win == WIN_W'(w), "notice window number");
      check(note.has_ev == last_in_win.exists(w), "notice has_ev");
      if (last_in_win.exists(w)) begin
        check(note.last_ts == TS_W'(last_in_win[w]), "notice last_ts");
        check(int'(note.n_last) == cnt_in_win[w], "notice n_last");
        if (cnt_in_win[w] > 1) n_multi++;
      end else n_empty++;
    end
    check(now_us == TS_W'(cyc / CPU), "microsecond counter");
  end

  task automatic send(input int ch, input bit p);
    int wait_cyc;
    aer_addr = {CH_W'(ch), p};
    exp_addr.push_back({CH_W'(ch), p});
    aer_req  = 1;
    wait_cyc = 0;
    while (!aer_ack) begin @(posedge clk); #1; wait_cyc++; end
    check(wait_cyc >= 2 && wait_cyc <= 3, "ack latency");
    aer_req = 0;
    while (aer_ack) begin @(posedge clk); #1; end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      int gap;
      // occasional long gaps give empty windows
      gap = ($urandom % 20 == 0) ? 450 : int'($urandom % 40);
      repeat (gap) @(posedge clk);
      #1 send(int'($urandom % 128), 1'($urandom));
    end
    repeat (500) @(posedge clk);
    #1;
    check(exp_addr.size() == 0, "all events delivered");
    check(n_notes >= 10 && n_empty > 0, "windows with and without events");
    check(n_multi > 0, "a window ending with several events in one microsecond");
    $display("events=%0d notices=%0d empty=%0d shared last us=%0d", n_ev, n_notes, n_empty, n_multi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
