// tb_kws_head -- self-checking test of the network head (linear, linear,
// GRU, class and confidence outputs). Random weights over the configuration
// bus; a sequence of random pooled window vectors (including an all-zero one,
// as an empty window gives). Class index, all class scores, the confidence
// and the window number are compared with the reference head of kws_ref_pkg.
// The time from input handshake to pred_valid must stay within the head
// latency of 2.11 us quoted for the design, 422 cycles at 200 MHz.
module tb_kws_head;
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

  logic in_valid = 0, in_ready, pred_valid;
  fvec_t in_x = '0;
  logic [WIN_W-1:0] in_win = '0, pred_win;
  logic [2:0] pred_class;
  logic [NCLS-1:0][7:0] pred_scores;
  logic [7:0] pred_conf;

  kws_head dut (.*);

  int classes_seen [NCLS];

  initial begin
    randomize_weights(12, 2000);
    cfg_mlp(0, NF); cfg_mlp(1, NF); cfg_gru(); cfg_mlp(2, NCLS); cfg_mlp(3, 1);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    while (cfg_q.size() > 0) begin
      @(negedge clk);
      cfg = cfg_q.pop_front();
    end
    @(negedge clk) cfg = '0;
    for (int w = 0; w < 30; w++) begin
      int x [NF], cls, sc [NF], conf;
      longint t0;
      for (int k = 0; k < NF; k++) x[k] = (w == 3) ? 0 : int'($urandom % 128);
      head_step(7, x, cls, sc, conf);
      @(negedge clk);
      for (int k = 0; k < NF; k++) in_x[k] = 8'(x[k]);
      in_win = WIN_W'(w + 100);
      in_valid = 1;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      t0 = cyc;
      #1 in_valid = 0;
      while (!pred_valid) begin @(posedge clk); #1; end
      check(cyc - t0 <= 422, "head latency within 2.11 us");
      check(int'(pred_class) == cls, "class");
      check(int'(pred_win) == w + 100, "window number");
      check(int'($signed(pred_conf)) == conf, "confidence");
      for (int i = 0; i < NCLS; i++) check(int'($signed(pred_scores[i])) == sc[i], "score");
      classes_seen[cls]++;
      if (w == 0) $display("head latency %0d cycles", cyc - t0);
      @(posedge clk); #1;
      check(!pred_valid, "single pulse");
    end
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
