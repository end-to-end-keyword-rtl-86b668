// tb_gru_cell -- self-checking test of the recurrent unit over a sequence of
// steps, so the hidden state carried between steps is tested too. Random
// weights go in over the configuration bus; each new hidden state is compared
// with the reference GRU of kws_ref_pkg, and out_valid must rise 3*72+1
// cycles after the input handshake.
module tb_gru_cell;
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

  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [NF-1:0][7:0] in_x, out_h;

  gru_cell dut (.*);

  int n_pos = 0, n_neg = 0;

  initial begin
    randomize_weights(12, 2000);
    cfg_gru();
    in_x = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    while (cfg_q.size() > 0) begin
      @(negedge clk);
      cfg = cfg_q.pop_front();
    end
    @(negedge clk) cfg = '0;
    for (int it = 0; it < 12; it++) begin
      int x [NF];
      longint t0;
      for (int k = 0; k < NF; k++) x[k] = int'($urandom % 128);
      gru_step(7, x);
      @(negedge clk);
      for (int k = 0; k < NF; k++) in_x[k] = 8'(x[k]);
      in_valid = 1;
      @(posedge clk);
      t0 = cyc;
      #1 in_valid = 0;
      while (!out_valid) begin @(posedge clk); #1; end
      check(cyc - t0 == 3 * NF + 1, "latency 216+1");
      for (int o = 0; o < NF; o++) begin
        check(int'($signed(out_h[o])) == gru_h[o], "hidden state");
        if (gru_h[o] > 0) n_pos++;
        if (gru_h[o] < 0) n_neg++;
      end
      @(negedge clk) out_ready = 1;
      @(negedge clk) out_ready = 0;
    end
    check(n_pos > 0 && n_neg > 0, "state of both signs");
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
