// tb_sync_fifo -- self-checking test of the generic FIFO used as burst FIFO
// and as inter-layer buffer. Random pushes and pops against a queue model:
// every popped element, the fill level, in_ready/out_valid and the overflow
// flag are compared with the model each cycle.
module tb_sync_fifo;
  localparam int DEPTH = 5;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready, overflow;
  logic [15:0] in_data, out_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [15:0] model [$];
  int n_full = 0, n_ovf = 0, n_both = 0;

  sync_fifo #(.T(logic [15:0]), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      // phase of mostly pushes, then mostly pops
      in_valid  = ($urandom % 100) < ((i / 200) % 2 ? 30 : 80);
      out_ready = ($urandom % 100) < ((i / 200) % 2 ? 80 : 30);
      in_data   = 16'($urandom);
      #1;
      check(count == model.size(), "count");
      check(in_ready == (model.size() < DEPTH), "in_ready");
      check(out_valid == (model.size() > 0), "out_valid");
      check(overflow == (in_valid && model.size() == DEPTH), "overflow");
      if (out_valid) check(out_data == model[0], "data");
      if (model.size() == DEPTH) n_full++;
      if (overflow) n_ovf++;
      if (in_valid && in_ready && out_valid && out_ready) n_both++;
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
    end
    check(n_full > 0 && n_ovf > 0 && n_both > 0, "coverage full/overflow/simultaneous");
    $display("full=%0d overflow=%0d simultaneous=%0d", n_full, n_ovf, n_both);
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
