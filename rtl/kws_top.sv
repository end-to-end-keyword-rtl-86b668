// kws_top -- end-to-end keyword spotting on neuromorphic audio events: from
// the auditory sensor's address events to a keyword prediction every 10 ms.
//
// Dataflow:
//   AER events -> timestamp_gen -> lif_filter -> sync_fifo (burst FIFO)
//     -> graph_gen -> buffer -> graph_conv 1 -> buffer -> graph_conv 2
//     -> buffer -> graph_conv 3 -> buffer -> graph_conv 4
//     -> maxpool_window -> kws_head -> prediction (class, scores, confidence)
//   timestamp_gen --(last timestamp of each 10 ms window)--> maxpool_window
//
// Scheduling: every PointNetConv layer takes 36 cycles per vertex of the
// neighbourhood (self plus up to 20 neighbours), so its service time depends
// on the event. Each layer has a small buffer in front (BUF_DEPTH entries)
// and raises its READY when it has finished its current convolution; a stage
// moves a vertex on only when the next buffer has room. Back-pressure thus
// travels up to the burst FIFO behind the event filter, which absorbs
// bursts. The sensor side cannot be stalled: an event arriving at a full FIFO
// is lost and counted in st_overflow.
//
// Window closing: the MaxPool stage forwards a window to the head only once
// the vertex carrying the window's last timestamp has passed the fourth
// layer (or a later vertex shows up, or the pipeline has drained; see
// maxpool_window).
//
// Interfaces: the sensor (not part of this RTL) connects through aer_req /
// aer_addr = {channel, polarity} / aer_ack. Weights, biases and filter
// thresholds are written over `cfg` (see kws_pkg::cfg_t) before use.
// pred_valid pulses once per window. st_* are free-running event counters.
//
// Defaults follow the 64-channel parallel sensor configuration chosen for the
// hardware: 64 channels, channel radius 10, skip 1, time radius 0..5000 us,
// filter division factor 8, weight 32, thresholds 64 -> 32 (exponential),
// 200 MHz clock, 10 ms windows. FIFO and buffer depths are own choices.
module kws_top
  import kws_pkg::*;
#(
  parameter int unsigned C           = 64,
  parameter int unsigned CLK_PER_US  = 200,
  parameter int unsigned WINDOW_US   = 10000,
  parameter int unsigned R_C         = 10,
  parameter int unsigned SKIP        = 1,
  parameter int unsigned RT_LOW      = 0,
  parameter int unsigned RT_HIGH     = 5000,
  parameter int unsigned DIV_FACTOR  = 8,
  parameter int unsigned LIF_W       = 32,
  parameter int unsigned TH_FIRST    = 64,
  parameter int unsigned TH_LAST     = 32,
  parameter int unsigned FIFO_DEPTH  = 256,
  parameter int unsigned BUF_DEPTH   = 2,
  parameter int unsigned NUM_CLASSES = 7,
  parameter int unsigned SHIFT       = 7
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // sensor address events
  input  logic                           aer_req,
  input  logic [CH_W:0]                  aer_addr,
  output logic                           aer_ack,
  // configuration
  input  cfg_t                           cfg,
  // prediction, once per window
  output logic                           pred_valid,
  output logic [WIN_W-1:0]               pred_win,
  output logic [$clog2(NUM_CLASSES)-1:0] pred_class,
  output logic [NUM_CLASSES-1:0][7:0]    pred_scores,
  output logic [7:0]                     pred_conf,
  // status
  output logic [TS_W-1:0]                now_us,
  output logic [31:0]                    st_events,
  output logic [31:0]                    st_passed,
  output logic [31:0]                    st_overflow,
  output logic [31:0]                    st_vertices,
  output logic                           pipe_empty
);
  localparam int unsigned NL = 4;   // PointNetConv layers

  // timestamping
  logic     ts_v;
  event_t   ts_ev;
  logic     note_v;
  winnote_t note;

  timestamp_gen #(.CLK_PER_US(CLK_PER_US), .WINDOW_US(WINDOW_US)) u_ts (
    .clk, .rst_n, .aer_req, .aer_addr, .aer_ack,
    .ev_valid(ts_v), .ev(ts_ev), .note_valid(note_v), .note(note), .now_us);

  // event filter
  logic   lif_v;
  event_t lif_ev;

  lif_filter #(.C(C), .DIV_FACTOR(DIV_FACTOR), .W(LIF_W),
               .TH_FIRST(TH_FIRST), .TH_LAST(TH_LAST)) u_lif (
    .clk, .rst_n, .in_valid(ts_v), .in(ts_ev), .cfg,
    .out_valid(lif_v), .out(lif_ev));

  // burst FIFO
  logic   fq_v, fq_r, fq_ovf;
  event_t fq_ev;
  logic [$clog2(FIFO_DEPTH+1)-1:0] fq_cnt;

  sync_fifo #(.T(event_t), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid(lif_v), .in_ready(), .in_data(lif_ev),
    .out_valid(fq_v), .out_ready(fq_r), .out_data(fq_ev),
    .count(fq_cnt), .overflow(fq_ovf));

  // graph generation
  logic  gg_v, gg_r;
  gjob_t gg_job;

  graph_gen #(.C(C), .R_C(R_C), .SKIP(SKIP), .RT_LOW(RT_LOW), .RT_HIGH(RT_HIGH)) u_gg (
    .clk, .rst_n, .in_valid(fq_v), .in_ready(fq_r), .in(fq_ev),
    .out_valid(gg_v), .out_ready(gg_r), .out(gg_job));

  // buffer in front of layer 1 (graph data only; layer-1 features derive from it)
  logic  b0_v, b0_r;
  gjob_t b0_job;
  logic [$clog2(BUF_DEPTH+1)-1:0] b_cnt [NL];

  sync_fifo #(.T(gjob_t), .DEPTH(BUF_DEPTH)) u_buf0 (
    .clk, .rst_n,
    .in_valid(gg_v), .in_ready(gg_r), .in_data(gg_job),
    .out_valid(b0_v), .out_ready(b0_r), .out_data(b0_job),
    .count(b_cnt[0]), .overflow());

  // PointNetConv chain
  logic  cv_iv [NL], cv_ir [NL], cv_ov [NL], cv_or [NL], cv_busy [NL];
  cjob_t cv_in [NL], cv_out [NL];

  assign cv_iv[0]   = b0_v;
  assign b0_r       = cv_ir[0];
  assign cv_in[0].g = b0_job;
  assign cv_in[0].x = feat1(b0_job.ev);

  for (genvar l = 1; l < NL; l++) begin : g_buf
    sync_fifo #(.T(cjob_t), .DEPTH(BUF_DEPTH)) u_buf (
      .clk, .rst_n,
      .in_valid(cv_ov[l-1]), .in_ready(cv_or[l-1]), .in_data(cv_out[l-1]),
      .out_valid(cv_iv[l]), .out_ready(cv_ir[l]), .out_data(cv_in[l]),
      .count(b_cnt[l]), .overflow());
  end

  graph_conv #(.IN_F(F1_N), .OUT_F(NF), .LANES(2), .SHIFT(SHIFT), .LAYER(L_CONV1)) u_conv1 (
    .clk, .rst_n, .in_valid(cv_iv[0]), .in_ready(cv_ir[0]), .in(cv_in[0]),
    .out_valid(cv_ov[0]), .out_ready(cv_or[0]), .out(cv_out[0]), .cfg, .busy(cv_busy[0]));
  graph_conv #(.IN_F(NF), .OUT_F(NF), .LANES(2), .SHIFT(SHIFT), .LAYER(L_CONV2)) u_conv2 (
    .clk, .rst_n, .in_valid(cv_iv[1]), .in_ready(cv_ir[1]), .in(cv_in[1]),
    .out_valid(cv_ov[1]), .out_ready(cv_or[1]), .out(cv_out[1]), .cfg, .busy(cv_busy[1]));
  graph_conv #(.IN_F(NF), .OUT_F(NF), .LANES(2), .SHIFT(SHIFT), .LAYER(L_CONV3)) u_conv3 (
    .clk, .rst_n, .in_valid(cv_iv[2]), .in_ready(cv_ir[2]), .in(cv_in[2]),
    .out_valid(cv_ov[2]), .out_ready(cv_or[2]), .out(cv_out[2]), .cfg, .busy(cv_busy[2]));
  graph_conv #(.IN_F(NF), .OUT_F(NF), .LANES(2), .SHIFT(SHIFT), .LAYER(L_CONV4)) u_conv4 (
    .clk, .rst_n, .in_valid(cv_iv[3]), .in_ready(cv_ir[3]), .in(cv_in[3]),
    .out_valid(cv_ov[3]), .out_ready(cv_or[3]), .out(cv_out[3]), .cfg, .busy(cv_busy[3]));

  // nothing stamped is still on its way to the MaxPool stage
  always_comb begin
    pipe_empty = !ts_v && !lif_v && !fq_v && !gg_v;
    for (int l = 0; l < int'(NL); l++)
      if (b_cnt[l] != '0 || cv_busy[l]) pipe_empty = 1'b0;
  end

  // window MaxPool
  logic             mp_v, mp_r;
  fvec_t            mp_x;
  logic [WIN_W-1:0] mp_win;

  maxpool_window u_mp (
    .clk, .rst_n,
    .in_valid(cv_ov[3]), .in_ready(cv_or[3]), .in(cv_out[3]),
    .note_valid(note_v), .note(note), .pipe_empty,
    .out_valid(mp_v), .out_ready(mp_r), .out_x(mp_x), .out_win(mp_win),
    .out_nev(), .out_cause());

  // network head
  kws_head #(.NUM_CLASSES(NUM_CLASSES), .SHIFT(SHIFT)) u_head (
    .clk, .rst_n, .in_valid(mp_v), .in_ready(mp_r), .in_x(mp_x), .in_win(mp_win),
    .cfg, .pred_valid, .pred_win, .pred_class, .pred_scores, .pred_conf);

  // status counters
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_events   <= '0;
      st_passed   <= '0;
      st_overflow <= '0;
      st_vertices <= '0;
    end else begin
      if (ts_v)   st_events   <= st_events + 1'b1;
      if (lif_v)  st_passed   <= st_passed + 1'b1;
      if (fq_ovf) st_overflow <= st_overflow + 1'b1;
      if (cv_ov[3] && cv_or[3]) st_vertices <= st_vertices + 1'b1;
    end
  end

endmodule
