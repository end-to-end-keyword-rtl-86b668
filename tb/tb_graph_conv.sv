// tb_graph_conv -- self-checking test of the PointNetConv layer.
// Two instances: a 72-feature layer (as layers 2-4) and a 3-feature first
// layer. Random weights are written over the configuration bus; then the
// vertex-feature memory is filled with one vertex per channel and random
// vertices with 0..20 random neighbours follow, with random consumer stalls.
// Each result (72 output features and the forwarded graph data) is compared
// with the reference PointNetConv of kws_ref_pkg, and the cycle count from
// input handshake to out_valid must be 36 * (neighbours + 1) + 1.
module tb_graph_conv;
  import kws_pkg::*;
  import kws_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  cfg_t cfg = '0;
  int checks = 0, failures = 0;
  longint cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  logic  in_valid [2], in_ready [2], out_valid [2], out_ready [2], busy [2];
  cjob_t in [2], out [2];

  graph_conv dut0 (.clk, .rst_n, .in_valid(in_valid[0]), .in_ready(in_ready[0]), .in(in[0]),
                   .out_valid(out_valid[0]), .out_ready(out_ready[0]), .out(out[0]), .cfg,
                   .busy(busy[0]));
  graph_conv #(.IN_F(3), .LAYER(L_CONV1)) dut1 (
                   .clk, .rst_n, .in_valid(in_valid[1]), .in_ready(in_ready[1]), .in(in[1]),
                   .out_valid(out_valid[1]), .out_ready(out_ready[1]), .out(out[1]), .cfg,
                   .busy(busy[1]));

  int n_jobs = 0, max_seen_ne = 0;

  task automatic run(input int k, input int l, input int in_f, input int njobs);
    for (int j = 0; j < njobs; j++) begin
      int c, ne, ech [MAXE], edt [MAXE], x [NF], y [NF];
      int used [MAXCH];
      longint t0;
      cjob_t job;
      int lat;
      for (int i = 0; i < MAXCH; i++) used[i] = 0;
      c = (j < 64) ? j : int'($urandom % 64);
      used[c] = 1;
      ne = (j < 64) ? 0 : (j % 7 == 0) ? 20 : int'($urandom % 21);
      for (int e = 0; e < ne; e++) begin
        int ch;
        do ch = int'($urandom % 64); while (used[ch]);
        used[ch] = 1;
        ech[e] = ch;
        edt[e] = int'($urandom % 5001);
      end
      for (int f = 0; f < NF; f++)
        x[f] = (f >= in_f) ? 0 : (in_f == NF) ? int'($urandom % 128) : rnd(-128, 127);
      job = '0;
      job.g.ev.c = CH_W'(c);
      job.g.ev.t = TS_W'($urandom);
      job.g.ev.p = 1'($urandom);
      job.g.ne   = NE_W'(ne);
      for (int e = 0; e < ne; e++) begin
        job.g.edges[e].c  = CH_W'(ech[e]);
        job.g.edges[e].dt = DT_W'(edt[e]);
      end
      for (int f = 0; f < NF; f++) job.x[f] = 8'(x[f]);
      conv_step(l, in_f, 7, c, x, ne, ech, edt, y);
      // offer the job
      @(negedge clk);
      in[k] = job;
      in_valid[k] = 1;
      @(posedge clk);
      while (!in_ready[k]) @(posedge clk);
      t0 = cyc;
      #1 in_valid[k] = 0;
      // wait for the result
      while (!out_valid[k]) begin @(posedge clk); #1; end
      lat = int'(cyc - t0);
      check(lat == 36 * (ne + 1) + 1, "latency");
      check(out[k].g == job.g, "graph data forwarded");
      for (int o = 0; o < NF; o++) check(int'(out[k].x[o]) == y[o], "output feature");
      // random consumer stall
      @(negedge clk);
      repeat ($urandom % 5) begin
        check(out_valid[k] && busy[k] && !in_ready[k], "holds result while stalled");
        @(negedge clk);
      end
      out_ready[k] = 1;
      @(posedge clk);
      #1 out_ready[k] = 0;
      if (ne > max_seen_ne) max_seen_ne = ne;
      n_jobs++;
    end
  endtask

  initial begin
    for (int k = 0; k < 2; k++) begin
      in_valid[k] = 0; out_ready[k] = 0; in[k] = '0;
    end
    randomize_weights(16, 3000);
    conv_reset();
    cfg_conv(1, NF);
    cfg_conv(0, 3);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    while (cfg_q.size() > 0) begin
      @(negedge clk);
      cfg = cfg_q.pop_front();
    end
    @(negedge clk) cfg = '0;
    run(0, 1, NF, 150);
    run(1, 0, 3, 100);
    check(max_seen_ne == 20, "full neighbourhood");
    $display("jobs=%0d", n_jobs);
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
