// tb_lif_filter -- self-checking test of the per-channel LIF event filter.
// Random events (increasing timestamps, random channels, back-to-back and
// with gaps) go through the design and through the reference model of the
// filtration algorithm in kws_ref_pkg (exponential default thresholds are
// computed there with real arithmetic). Every accept/drop decision and the
// forwarded event are compared, one cycle after the input. Mid-run, the
// thresholds are rewritten over the configuration bus.
module tb_lif_filter;
  import kws_pkg::*;
  import kws_ref_pkg::*;
  localparam int CH = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_valid;
  event_t in = '0, out;
  cfg_t cfg = '0;
  int checks = 0, failures = 0;
  int n_acc = 0, n_drop = 0;

  lif_filter #(.C(CH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    longint t;
    t = 1000;
    lif_reset(CH, 64, 32);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // default thresholds: 64 .. 32 exponentially
    check(lif_th[0] == 64 && lif_th[CH-1] == 32, "reference thresholds");
    for (int i = 0; i < 6000; i++) begin
      bit exp_acc;
      @(negedge clk);
      cfg = '0;
      if (i == 3000) begin
        // linear 48 -> 16 written over the bus
        for (int c = 0; c < CH; c++) begin
          cfg = '{we: 1'b1, layer: L_LIF, kind: K_THRESH, row: 8'(c), col: 8'd0,
                  data: 32'(48 - (32 * c) / (CH - 1))};
          lif_th[c] = 48 - (32 * c) / (CH - 1);
          @(negedge clk);
        end
        cfg = '0;
      end
      in_valid = ($urandom % 4) != 0;
      t += ($urandom % 3 == 0) ? longint'($urandom % 700) : longint'($urandom % 20);
      in.t = TS_W'(t);
      in.c = CH_W'($urandom % CH);
      in.p = 1'($urandom);
      exp_acc = in_valid ? lif_step(t, int'(in.c), 8, 32) : 1'b0;
      @(posedge clk); #1;
      check(out_valid == exp_acc, "accept decision");
      if (exp_acc) begin
        check(out == in, "forwarded event");
        n_acc++;
      end else if (in_valid) n_drop++;
    end
    check(n_acc > 100 && n_drop > 100, "both accepted and dropped events");
    $display("accepted=%0d dropped=%0d", n_acc, n_drop);
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
