// tb_graph_gen -- self-checking test of graph generation at the selected
// parameters (64 channels, radius 10, skip 1, time radius 0..5000 us).
// Random events with increasing timestamps are offered with random consumer
// stalls; each produced vertex is compared with the reference neighbourhood
// search of kws_ref_pkg (channel and age of every neighbour, in order, and
// the neighbour count). A second instance with radius 20 / skip 2 and a
// lower time radius of 500 us checks the skip step and the lower bound.
module tb_graph_gen;
  import kws_pkg::*;
  import kws_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // two configurations, tested one after the other
  logic   in_valid [2], in_ready [2], out_valid [2], out_ready [2];
  event_t in [2];
  gjob_t  out [2];

  graph_gen dut0 (.clk, .rst_n, .in_valid(in_valid[0]), .in_ready(in_ready[0]), .in(in[0]),
                  .out_valid(out_valid[0]), .out_ready(out_ready[0]), .out(out[0]));
  graph_gen #(.C(64), .R_C(20), .SKIP(2), .RT_LOW(500), .RT_HIGH(5000)) dut1 (
                  .clk, .rst_n, .in_valid(in_valid[1]), .in_ready(in_ready[1]), .in(in[1]),
                  .out_valid(out_valid[1]), .out_ready(out_ready[1]), .out(out[1]));

  int max_ne [2] = '{0, 0};
  int n_stall = 0;

  task automatic run(input int k, input int rc, input int skip, input int rlo);
    longint t;
    gjob_t exp_q [$];
    int n_out;
    gg_reset();
    t = 10;
    n_out = 0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      out_ready[k] = ($urandom % 3) != 0;
      if (!in_valid[k] || in_ready[k]) begin
        in_valid[k] = ($urandom % 4) != 0;
        t += ($urandom % 200 == 0) ? longint'($urandom % 6000) : longint'($urandom % 20);
        in[k].t = TS_W'(t);
        in[k].c = CH_W'($urandom % 64);
        in[k].p = 1'($urandom);
      end else n_stall++;
      #1;
      if (out_valid[k] && out_ready[k]) begin
        gjob_t e;
        e = exp_q.pop_front();
        check(out[k] == e, "vertex and edge list");
        n_out++;
      end
      if (in_valid[k] && in_ready[k]) begin
        int ne, ech [MAXE], edt [MAXE];
        gjob_t e;
        gg_step(t, int'(in[k].c), 64, rc, skip, rlo, 5000, ne, ech, edt);
        e = '0;
        e.ev = in[k];
        e.ne = NE_W'(ne);
        for (int j = 0; j < ne; j++) begin
          e.edges[j].c  = CH_W'(ech[j]);
          e.edges[j].dt = DT_W'(edt[j]);
        end
        if (ne > max_ne[k]) max_ne[k] = ne;
        exp_q.push_back(e);
      end
      @(posedge clk);
    end
    @(negedge clk);
    in_valid[k] = 0;
    check(n_out > 1000, "throughput");
  endtask

  initial begin
    for (int k = 0; k < 2; k++) begin
      in_valid[k] = 0; out_ready[k] = 0; in[k] = '0;
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    run(0, 10, 1, 0);
    run(1, 20, 2, 500);
    check(max_ne[0] == 20 && max_ne[1] > 10, "full neighbourhoods seen");
    check(n_stall > 0, "consumer stalls seen");
    $display("max neighbours %0d %0d, stalls %0d", max_ne[0], max_ne[1], n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
