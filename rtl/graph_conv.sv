// graph_conv -- one PointNetConv graph-convolution layer with its own
// vertex-feature memory.
//
// Function: for the new vertex i with neighbours N(i) (from graph_gen),
//     x'_i[o] = max over j in N(i) + {i} of ReLU(q(b[o] + sum_k W[o][k] * v_j[k]))
// where v_j = (x_j, c_j - c_i, dt_feat(t_i - t_j)) is the neighbour's input
// feature vector followed by its relative position (channel offset and
// quantised time offset; both 0 for the self-loop), and q() is an arithmetic
// right shift by SHIFT saturated to int8. The learnable function phi is one
// linear layer with ReLU (batch normalisation is folded into W and b).
//
// Vertex-feature memory: the input features of the most recent vertex of
// every channel, nine 8-bit features per 72-bit word, WPV words per vertex,
// MAX_CH * WPV words (1024 words for 72 features and 128 channels). When a
// vertex is accepted its own input features are written to its channel's
// slot; neighbours are read from the slots of their channels. A neighbour is
// never on the vertex's own channel, so the write and the reads never meet.
//
// Scheduling: LANES (2) output features are produced per clock, so one vertex
// (self or neighbour) takes NQ = OUT_F/LANES = 36 cycles. While one vertex is
// computed, the WPV words of the next neighbour are fetched into a prefetch
// buffer (WPV <= NQ, so the fetch is always hidden). A job therefore takes
// NQ * (ne + 1) compute cycles; out_valid rises NQ*(ne+1)+1 cycles after the
// input handshake and a new job is accepted the cycle after the output is
// taken. in_ready is high only when the layer is idle: it is the READY of the
// back-pressure scheduler.
//
// Weights and biases are loaded over the configuration bus (layer LAYER,
// K_WEIGHT: row = output o, col = input element k, data[7:0]; K_BIAS: row = o,
// data = 32-bit bias).
//
// From the design description: the PointNetConv formula, 72 output features,
// two 72-feature vector products in parallel, the 72-bit x 1024 feature memory
// organised per channel, the readiness signalling. Own choices: phi as one
// linear layer, the requantisation, the relative-position encoding, and the
// exact cycle schedule.
module graph_conv
  import kws_pkg::*;
#(
  parameter int unsigned IN_F  = NF,
  parameter int unsigned OUT_F = NF,
  parameter int unsigned LANES = 2,
  parameter int unsigned SHIFT = 7,
  parameter layer_e      LAYER = L_CONV2
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  cjob_t in,
  output logic  out_valid,
  input  logic  out_ready,
  output cjob_t out,
  input  cfg_t  cfg,
  output logic  busy
);
  localparam int unsigned FPW   = 9;                       // features per word
  localparam int unsigned WPV   = (IN_F + FPW - 1) / FPW;  // words per vertex
  localparam int unsigned DEPTH = MAX_CH * WPV;
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned NIN   = IN_F + 2;
  localparam int unsigned NQ    = OUT_F / LANES;
  localparam int unsigned QW    = $clog2(NQ + 1);
  localparam int unsigned WW    = $clog2(WPV + 1);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_e;

  // parameters of phi
  logic [7:0]  w_mem [OUT_F][NIN];
  logic [31:0] b_mem [OUT_F];
  // vertex-feature memory
  logic [FPW*FEAT_W-1:0] fmem [DEPTH];

  state_e          state;
  gjob_t           job;
  fvec_t           xi, cur_x, res, pf_buf;
  feat_t           cur_dc, cur_dt;
  logic [NE_W:0]   vidx;          // vertices done: 0 = self, k = neighbour k-1
  logic [QW-1:0]   q;
  logic [NE_W:0]   pf_idx;        // neighbour being fetched
  logic [WW-1:0]   pf_word;       // words requested
  logic            pf_full;
  logic            rd_v;
  logic [WW-1:0]   rd_w;
  logic [FPW*FEAT_W-1:0] rd_data;
  logic [WW-1:0]   wb_word;
  feat_t           y [LANES];

  assign in_ready  = (state == S_IDLE);
  assign out_valid = (state == S_DONE);
  assign busy      = (state != S_IDLE);
  assign out.g     = job;
  assign out.x     = res;

  // phi for LANES output features of the current vertex
  always_comb begin
    feat_t vin [NIN];
    for (int k = 0; k < int'(IN_F); k++) vin[k] = cur_x[k];
    vin[IN_F]     = cur_dc;
    vin[IN_F + 1] = cur_dt;
    for (int l = 0; l < int'(LANES); l++) begin
      int o;
      logic signed [31:0] acc;
      o   = int'(q) * int'(LANES) + l;
      if (o >= int'(OUT_F)) o = 0;
      acc = $signed(b_mem[o]);
      for (int k = 0; k < int'(NIN); k++)
        acc = acc + $signed(w_mem[o][k]) * $signed(vin[k]);
      y[l] = relu_q(acc, SHIFT);
    end
  end

  function automatic logic [FPW*FEAT_W-1:0] word_of(input fvec_t f, input int w);
    logic [FPW*FEAT_W-1:0] r;
    for (int i = 0; i < int'(FPW); i++)
      r[i*FEAT_W +: FEAT_W] = (w*FPW + i < int'(IN_F)) ? f[w*FPW + i] : '0;
    return r;
  endfunction

  logic          last_q, more;
  logic [AW-1:0] rd_addr;
  assign last_q  = (q == QW'(NQ - 1));
  assign more    = (vidx < {1'b0, job.ne});
  assign rd_addr = AW'(int'(job.edges[pf_idx[NE_W-1:0]].c) * WPV + int'(pf_word));

  // feature memory: one write port, one registered read port
  always_ff @(posedge clk) begin
    if (state == S_RUN && wb_word < WW'(WPV))
      fmem[AW'(int'(job.ev.c) * WPV + int'(wb_word))] <= word_of(xi, int'(wb_word));
    rd_data <= fmem[rd_addr];
  end

  always_ff @(posedge clk) begin
    if (cfg.we && cfg.layer == LAYER) begin
      if (cfg.kind == K_WEIGHT && int'(cfg.row) < OUT_F && int'(cfg.col) < NIN)
        w_mem[cfg.row][cfg.col] <= cfg.data[7:0];
      if (cfg.kind == K_BIAS && int'(cfg.row) < OUT_F)
        b_mem[cfg.row] <= cfg.data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      job     <= '0;
      xi      <= '0;
      cur_x   <= '0;
      cur_dc  <= '0;
      cur_dt  <= '0;
      res     <= '0;
      pf_buf  <= '0;
      vidx    <= '0;
      q       <= '0;
      pf_idx  <= '0;
      pf_word <= '0;
      pf_full <= 1'b0;
      rd_v    <= 1'b0;
      rd_w    <= '0;
      wb_word <= '0;
    end else begin
      rd_v <= 1'b0;
      unique case (state)
        S_IDLE: if (in_valid) begin
          fvec_t xm;
          for (int k = 0; k < int'(NF); k++) xm[k] = (k < int'(IN_F)) ? in.x[k] : '0;
          job     <= in.g;
          xi      <= xm;
          cur_x   <= xm;
          cur_dc  <= '0;
          cur_dt  <= '0;
          res     <= '0;
          vidx    <= '0;
          q       <= '0;
          pf_idx  <= '0;
          pf_word <= '0;
          pf_full <= 1'b0;
          wb_word <= '0;
          state   <= S_RUN;
        end
        S_RUN: begin
          // write-back of the vertex's own input features
          if (wb_word < WW'(WPV)) wb_word <= wb_word + 1'b1;
          // prefetch of the next neighbour
          if (!pf_full && pf_idx < {1'b0, job.ne} && pf_word < WW'(WPV)) begin
            rd_v    <= 1'b1;
            rd_w    <= pf_word;
            pf_word <= pf_word + 1'b1;
          end
          if (rd_v) begin
            for (int i = 0; i < int'(FPW); i++)
              if (int'(rd_w) * FPW + i < NF)
                pf_buf[int'(rd_w) * FPW + i] <= rd_data[i*FEAT_W +: FEAT_W];
            if (rd_w == WW'(WPV - 1)) pf_full <= 1'b1;
          end
          // compute
          for (int l = 0; l < int'(LANES); l++) begin
            int o;
            o = int'(q) * int'(LANES) + l;
            if (o < int'(OUT_F) && $signed(y[l]) > $signed(res[o])) res[o] <= y[l];
          end
          if (!last_q) begin
            q <= q + 1'b1;
          end else if (!more) begin
            state <= S_DONE;
          end else if (pf_full) begin
            edge_t e;
            e       = job.edges[vidx[NE_W-1:0]];
            cur_x   <= pf_buf;
            cur_dc  <= feat_t'(int'(e.c) - int'(job.ev.c));
            cur_dt  <= dt_feat(e.dt);
            vidx    <= vidx + 1'b1;
            q       <= '0;
            pf_full <= 1'b0;
            pf_word <= '0;
            pf_idx  <= pf_idx + 1'b1;
          end
        end
        S_DONE: if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  a_prefetch_hidden: assert property (@(posedge clk) disable iff (!rst_n)
      (state == S_RUN && last_q && more) |-> pf_full);

endmodule
