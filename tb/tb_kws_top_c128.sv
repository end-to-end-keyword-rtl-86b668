// tb_kws_top_c128 -- end-to-end test of the pipeline built for the largest
// sensor setting: 128 channels, channel radius 20 with skip 2 (so again at
// most 20 neighbours), time radius 0..5000 us, thresholds 64 -> 32 spread over
// 128 channels. As in tb_kws_top the windows are shortened to 200 us and the
// burst FIFO to 16 entries; everything else is at its default.
//
// Checking as in tb_kws_top: every filter decision, every prediction against
// the reference model (graph, four PointNetConv layers, pooling, head), one
// prediction per window in order, the 2.11 us answer to an empty window, the
// 35 us answer to the last window, and each mechanism (filtered events, FIFO and buffer back-pressure, FIFO
// overflow, the three window-closing causes, empty windows) at least once.
// The 32-channel setting (radius 5, skip 1) differs from this and from the
// 64-channel default only in these sizes.
module tb_kws_top_c128;
  import kws_pkg::*;
  import kws_ref_pkg::*;
  localparam int CPU    = 200;    // clocks per microsecond
  localparam int WUS    = 200;    // window length, us
  localparam int NWIN   = 24;     // windows with traffic
  localparam int C      = 128;

  logic clk = 0, rst_n = 0;
  logic aer_req = 0, aer_ack;
  logic [CH_W:0] aer_addr = '0;
  cfg_t cfg = '0;
  logic pred_valid;
  logic [WIN_W-1:0] pred_win;
  logic [2:0] pred_class;
  logic [NCLS-1:0][7:0] pred_scores;
  logic [7:0] pred_conf;
  logic [TS_W-1:0] now_us;
  logic [31:0] st_events, st_passed, st_overflow, st_vertices;
  logic pipe_empty;

  kws_top #(.C(C), .R_C(20), .SKIP(2), .WINDOW_US(WUS), .FIFO_DEPTH(16)) dut (.*);

  always #2.5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) if (rst_n) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  // ---------------- reference model following the design ----------------
  int     pool [int][NF];
  bit     lif_pend = 0, lif_exp = 0;
  event_t lif_pev;
  longint note_cyc [int];
  int     next_win = 0;
  int n_filtered = 0, n_fifo_bp = 0, n_buf_bp = 0, n_ovf = 0;
  int n_last = 0, n_later = 0, n_drain = 0, n_empty = 0, n_pred = 0, n_vert = 0;
  int max_empty_lat = 0;
  int pred_lat [int];

  always @(posedge clk) if (rst_n) begin
    // LIF decision of the event stamped one cycle earlier
    if (lif_pend) begin
      check(dut.lif_v == lif_exp, "filter decision");
      if (lif_exp) check(dut.lif_ev == lif_pev, "filtered event");
      if (!lif_exp) n_filtered++;
    end
    lif_pend = dut.ts_v;
    if (dut.ts_v) begin
      lif_pev = dut.ts_ev;
      lif_exp = lif_step(longint'(dut.ts_ev.t), int'(dut.ts_ev.c), 8, 32);
    end
    // events entering the FIFO go through the reference graph and layers
    if (dut.lif_v && !dut.fq_ovf) begin
      int ne, ech [MAXE], edt [MAXE], x [NF], y [NF], w;
      longint t;
      t = longint'(dut.lif_ev.t);
      gg_step(t, int'(dut.lif_ev.c), C, 20, 2, 0, 5000, ne, ech, edt);
      kws_ref_pkg::feat1(int'(dut.lif_ev.c), t, int'(dut.lif_ev.p), x);
      conv_step(0, 3, 7, int'(dut.lif_ev.c), x, ne, ech, edt, y);
      for (int l = 1; l < 4; l++) begin
        x = y;
        conv_step(l, NF, 7, int'(dut.lif_ev.c), x, ne, ech, edt, y);
      end
      w = int'(t / WUS);
      if (!pool.exists(w)) for (int k = 0; k < NF; k++) pool[w][k] = 0;
      for (int k = 0; k < NF; k++) if (y[k] > pool[w][k]) pool[w][k] = y[k];
      n_vert++;
    end
    if (dut.fq_ovf) n_ovf++;
    if (dut.fq_v && !dut.fq_r) n_fifo_bp++;
    if (dut.gg_v && !dut.gg_r) n_buf_bp++;
    for (int l = 0; l < 4; l++) if (dut.cv_ov[l] && !dut.cv_or[l]) n_buf_bp++;
    if (dut.note_v) note_cyc[int'(dut.note.win)] = cyc;
    if (dut.mp_v && dut.mp_r) begin
      case (dut.u_mp.out_cause)
        2'd0: n_last++;
        2'd1: n_later++;
        default: n_drain++;
      endcase
      if (dut.u_mp.out_nev == 0) n_empty++;
    end
    if (pred_valid) begin
      int x [NF], cls, sc [NF], conf, w;
      w = int'(pred_win);
      check(w == next_win, "windows predicted in order");
      next_win = w + 1;
      if (pool.exists(w)) x = pool[w];
      else for (int k = 0; k < NF; k++) x[k] = 0;
      head_step(7, x, cls, sc, conf);
      check(int'(pred_class) == cls, "predicted class");
      check(int'($signed(pred_conf)) == conf, "confidence");
      for (int i = 0; i < NCLS; i++) check(int'($signed(pred_scores[i])) == sc[i], "class score");
      if (note_cyc.exists(w)) pred_lat[w] = int'(cyc - note_cyc[w]);
      if (!pool.exists(w) && note_cyc.exists(w)) begin
        int lat;
        lat = int'(cyc - note_cyc[w]);
        if (lat > max_empty_lat) max_empty_lat = lat;
        check(lat <= 422, "empty-window prediction within 2.11 us");
      end
      n_pred++;
    end
  end

  // ---------------- sensor model ----------------
  // a channel whose next event the filter drops (by the reference state)
  function automatic int quiet_channel(input longint t);
    for (int c = 0; c < C - 1; c++) begin
      longint dec;
      int v;
      dec = (t - lif_tl[c]) >> 8;
      v   = (longint'(lif_v[c]) > dec) ? lif_v[c] - int'(dec) : 0;
      if (v + 32 < lif_th[c]) return c;
    end
    return 0;
  endfunction

  task automatic send(input int ch, input bit p);
    aer_addr = {CH_W'(ch), p};
    aer_req  = 1;
    while (!aer_ack) begin @(posedge clk); #0.1; end
    aer_req = 0;
    while (aer_ack) begin @(posedge clk); #0.1; end
  endtask

  initial begin
    randomize_weights(12, 2000);
    conv_reset();
    gg_reset();
    lif_reset(C, 64, 32);
    cfg_conv(0, 3); cfg_conv(1, NF); cfg_conv(2, NF); cfg_conv(3, NF);
    cfg_mlp(0, NF); cfg_mlp(1, NF); cfg_gru(); cfg_mlp(2, NCLS); cfg_mlp(3, 1);
    // the weight memories take writes while the rest is held in reset
    while (cfg_q.size() > 0) begin
      @(negedge clk);
      cfg = cfg_q.pop_front();
    end
    @(negedge clk) cfg = '0;
    repeat (3) @(posedge clk);
    #0.1 rst_n = 1;
    // traffic, aligned to the next window start
    while (now_us % WUS != 0) @(posedge clk);
    for (int w = 0; w < NWIN; w++) begin
      longint wend;
      wend = (longint'(now_us) / WUS + 1) * WUS;
      while (longint'(now_us) < wend - 8) begin
        int gap;
        case (w % 4)
          0:       gap = 200 + int'($urandom % 60);      // burst
          1, 3:    gap = 1500 + int'($urandom % 3000);   // moderate
          default: gap = -1;                             // silent
        endcase
        if (gap < 0) begin @(posedge clk); continue; end
        for (int i = 0; i < gap && longint'(now_us) < wend - 8; i++) @(posedge clk);
        #0.1;
        if (longint'(now_us) >= wend - 8) break;
        // low channels (high frequencies) are busier
        send(int'(($urandom % C) * ($urandom % C) / C), 1'($urandom));
      end
      // tail event of the window: in moderate windows one that the filter
      // passes (last channel: threshold = weight), in bursts one it drops
      while (longint'(now_us) < wend - 1) @(posedge clk);
      #0.1;
      if (w % 4 == 1 || w % 4 == 3) send(C - 1, 1'b1);
      else if (w % 4 == 0) send(quiet_channel(longint'(now_us)), 1'b0);
      while (longint'(now_us) < wend) @(posedge clk);
    end
    // let the pipeline drain and the last windows be predicted
    begin
      int last_win;
      last_win = int'(longint'(now_us) / WUS) - 1;
      while (next_win <= last_win) @(posedge clk);
    end
    repeat (4 * CPU) @(posedge clk);
    check(n_pred == next_win && n_pred >= NWIN, "one prediction per window");
    check(n_filtered > 0, "mechanism: events removed by the filter");
    check(n_fifo_bp > 0, "mechanism: FIFO back-pressure");
    check(n_buf_bp > 0, "mechanism: buffer back-pressure (READY low)");
    check(n_ovf > 0, "mechanism: FIFO overflow");
    check(n_last > 0, "mechanism: window closed by its last event");
    check(n_later > 0, "mechanism: window closed by a later event");
    check(n_drain > 0, "mechanism: window closed by draining");
    check(n_empty > 0, "mechanism: empty window");
    check(int'(st_vertices) == n_vert, "vertex count");
    // the last traffic window ends with an event 1 us before its end and no
    // backlog: window end to prediction within 35 us
    check(pred_lat.exists(NWIN - 1) && pred_lat[NWIN - 1] <= 35 * CPU, "post-window latency");
    $display("events=%0d passed=%0d filtered=%0d overflow=%0d vertices=%0d", st_events,
             st_passed, n_filtered, n_ovf, n_vert);
    $display("fifo_bp=%0d buf_bp=%0d close last/later/drain=%0d/%0d/%0d empty=%0d preds=%0d",
             n_fifo_bp, n_buf_bp, n_last, n_later, n_drain, n_empty, n_pred);
    $display("empty-window prediction latency %0d cycles, last window %0d cycles",
             max_empty_lat, pred_lat.exists(NWIN - 1) ? pred_lat[NWIN - 1] : -1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
