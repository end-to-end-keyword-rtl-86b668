// kws_head -- the network head that turns one pooled 72-feature window vector
// into a keyword prediction every 10 ms.
//
// Structure (as in the design's block diagram): linear -> linear -> GRU, and
// from the GRU state two linear outputs in parallel: the class scores
// (NUM_CLASSES: the keywords plus an "unknown" class) and a single
// confidence value saying how likely a keyword has just ended in this window.
// The predicted class is the index of the largest score (first one on ties).
//
// Timing: the layers are chained with valid/ready handshakes, so a new window
// vector can enter the first layer while later layers still work on the
// previous one. One window takes 72 + 72 + 216 + NUM_CLASSES plus about six
// handshake cycles from the input handshake to pred_valid (a one-cycle pulse),
// i.e. about 1.9 us at 200 MHz. The window number travels alongside in a
// small queue.
//
// Configuration: each layer listens to the configuration bus under its own
// layer id (L_MLP1, L_MLP2, L_GRU, L_CLS, L_CONF).
//
// From the design description: the layer sequence, the class/confidence
// outputs, one prediction per window. Own choices: hidden widths of 72, the
// class count of 7 (which makes the whole network's parameter count come out
// at the stated 59.84k), ReLU after the first two layers, the requantisation
// shifts.
module kws_head
  import kws_pkg::*;
#(
  parameter int unsigned NUM_CLASSES = 7,
  parameter int unsigned SHIFT       = 7
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  output logic                         in_ready,
  input  fvec_t                        in_x,
  input  logic [WIN_W-1:0]             in_win,
  input  cfg_t                         cfg,
  output logic                         pred_valid,
  output logic [WIN_W-1:0]             pred_win,
  output logic [$clog2(NUM_CLASSES)-1:0] pred_class,
  output logic [NUM_CLASSES-1:0][7:0]  pred_scores,
  output logic [7:0]                   pred_conf
);
  localparam int unsigned CW = $clog2(NUM_CLASSES);

  logic                       m1_iv, m1_ir, m1_ov, m1_or;
  logic [NF-1:0][7:0]         m1_y, m2_y, g_h;
  logic                       m2_ov, m2_or, g_ov, g_or;
  logic                       c_ir, c_ov, f_ir, f_ov, both;
  logic [NUM_CLASSES-1:0][7:0] c_y;
  logic [0:0][7:0]            f_y;
  logic                       wq_ov;
  logic [WIN_W-1:0]           wq_win;

  assign m1_iv    = in_valid;
  assign in_ready = m1_ir;

  mlp_layer #(.IN_N(NF), .OUT_N(NF), .RELU(1'b1), .SHIFT(SHIFT), .LAYER(L_MLP1)) u_mlp1 (
    .clk, .rst_n, .in_valid(m1_iv), .in_ready(m1_ir), .in_x(in_x),
    .out_valid(m1_ov), .out_ready(m1_or), .out_y(m1_y), .cfg);

  mlp_layer #(.IN_N(NF), .OUT_N(NF), .RELU(1'b1), .SHIFT(SHIFT), .LAYER(L_MLP2)) u_mlp2 (
    .clk, .rst_n, .in_valid(m1_ov), .in_ready(m1_or), .in_x(m1_y),
    .out_valid(m2_ov), .out_ready(m2_or), .out_y(m2_y), .cfg);

  gru_cell #(.IN_N(NF), .H(NF), .SHIFT(SHIFT)) u_gru (
    .clk, .rst_n, .in_valid(m2_ov), .in_ready(m2_or), .in_x(m2_y),
    .out_valid(g_ov), .out_ready(g_or), .out_h(g_h), .cfg);

  // the two output layers take the GRU state together
  assign g_or = c_ir && f_ir;

  mlp_layer #(.IN_N(NF), .OUT_N(NUM_CLASSES), .RELU(1'b0), .SHIFT(SHIFT), .LAYER(L_CLS)) u_cls (
    .clk, .rst_n, .in_valid(g_ov && f_ir), .in_ready(c_ir), .in_x(g_h),
    .out_valid(c_ov), .out_ready(both), .out_y(c_y), .cfg);

  mlp_layer #(.IN_N(NF), .OUT_N(1), .RELU(1'b0), .SHIFT(SHIFT), .LAYER(L_CONF)) u_conf (
    .clk, .rst_n, .in_valid(g_ov && c_ir), .in_ready(f_ir), .in_x(g_h),
    .out_valid(f_ov), .out_ready(both), .out_y(f_y), .cfg);

  assign both = c_ov && f_ov;

  sync_fifo #(.T(logic [WIN_W-1:0]), .DEPTH(4)) u_winq (
    .clk, .rst_n,
    .in_valid(in_valid && m1_ir), .in_ready(), .in_data(in_win),
    .out_valid(wq_ov), .out_ready(both), .out_data(wq_win),
    .count(), .overflow());

  function automatic logic [CW-1:0] argmax(input logic [NUM_CLASSES-1:0][7:0] s);
    logic [CW-1:0] bi;
    bi = '0;
    for (int i = 1; i < int'(NUM_CLASSES); i++)
      if ($signed(s[i]) > $signed(s[bi])) bi = CW'(i);
    return bi;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pred_valid  <= 1'b0;
      pred_win    <= '0;
      pred_class  <= '0;
      pred_scores <= '0;
      pred_conf   <= '0;
    end else begin
      pred_valid <= both;
      if (both) begin
        pred_win    <= wq_win;
        pred_class  <= argmax(c_y);
        pred_scores <= c_y;
        pred_conf   <= f_y[0];
      end
    end
  end

  a_win_tracked: assert property (@(posedge clk) disable iff (!rst_n) both |-> wq_ov);

endmodule
