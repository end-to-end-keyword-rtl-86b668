// tb_mlp_layer -- self-checking test of the head's linear layer: a 72x72
// layer with ReLU and a 72x7 layer without, loaded with random weights over
// the configuration bus and fed random vectors. Outputs are compared with the
// reference linear layer of kws_ref_pkg, and out_valid must rise OUT_N+1
// cycles after the input handshake.
module tb_mlp_layer;
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

  logic a_iv = 0, a_ir, a_ov, a_or = 0, b_iv = 0, b_ir, b_ov, b_or = 0;
  logic [NF-1:0][7:0] a_x, a_y, b_x;
  logic [NCLS-1:0][7:0] b_y;

  mlp_layer dut_a (.clk, .rst_n, .in_valid(a_iv), .in_ready(a_ir), .in_x(a_x),
                   .out_valid(a_ov), .out_ready(a_or), .out_y(a_y), .cfg);
  mlp_layer #(.OUT_N(NCLS), .RELU(1'b0), .LAYER(L_CLS)) dut_b (
                   .clk, .rst_n, .in_valid(b_iv), .in_ready(b_ir), .in_x(b_x),
                   .out_valid(b_ov), .out_ready(b_or), .out_y(b_y), .cfg);

  int n_neg = 0, n_zero = 0;

  initial begin
    randomize_weights(16, 3000);
    cfg_mlp(0, NF);
    cfg_mlp(3, NCLS);   // reference slot 3 loaded into the L_CLS instance
    for (int i = 0; i < cfg_q.size(); i++)
      if (cfg_q[i].layer == L_CONF) cfg_q[i].layer = L_CLS;
    a_x = '0; b_x = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    while (cfg_q.size() > 0) begin
      @(negedge clk);
      cfg = cfg_q.pop_front();
    end
    @(negedge clk) cfg = '0;
    for (int it = 0; it < 40; it++) begin
      int x [NF], ya [NF], yb [NF];
      longint t0;
      for (int k = 0; k < NF; k++) x[k] = (it % 2) ? int'($urandom % 128) : rnd(-128, 127);
      mlp_step(0, NF, 1, 7, x, ya);
      mlp_step(3, NCLS, 0, 7, x, yb);
      @(negedge clk);
      for (int k = 0; k < NF; k++) begin a_x[k] = 8'(x[k]); b_x[k] = 8'(x[k]); end
      a_iv = 1; b_iv = 1;
      check(a_ir && b_ir, "ready when idle");
      @(posedge clk);
      t0 = cyc;
      #1 a_iv = 0; b_iv = 0;
      while (!b_ov) begin @(posedge clk); #1; end
      check(cyc - t0 == NCLS + 1, "latency 7+1");
      while (!a_ov) begin @(posedge clk); #1; end
      check(cyc - t0 == NF + 1, "latency 72+1");
      for (int o = 0; o < NF; o++) begin
        check(int'(a_y[o]) == ya[o], "relu layer output");
        if (ya[o] == 0) n_zero++;
      end
      for (int o = 0; o < NCLS; o++) begin
        check(int'($signed(b_y[o])) == yb[o], "linear layer output");
        if (yb[o] < 0) n_neg++;
      end
      repeat ($urandom % 3) begin @(negedge clk); check(a_ov && !a_ir, "hold"); end
      @(negedge clk) begin a_or = 1; b_or = 1; end
      @(negedge clk) begin a_or = 0; b_or = 0; end
    end
    check(n_neg > 0 && n_zero > 0, "negative and clipped outputs seen");
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
