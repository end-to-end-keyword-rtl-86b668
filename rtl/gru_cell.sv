// gru_cell -- the recurrent memory unit of the network head: a gated
// recurrent unit (GRU) whose hidden state carries context from one 10 ms
// window to the next.
//
// For every input vector x (one per window) and hidden state h:
//     r = hsig(q(Wxr x + bxr + Whr h + bhr))
//     z = hsig(q(Wxz x + bxz + Whz h + bhz))
//     n = htanh(q(Wxn x + bxn + (r * (Whn h + bhn)) >> 6))
//     h = ((1 - z) * n + z * h)
// Fixed point: h, n in Q1.6 int8 (64 = 1.0), r and z in 0..64. q() is an
// arithmetic right shift by SHIFT saturated to int8; hsig(v) = clamp(v/4 +
// 0.5, 0, 1) and htanh(v) = clamp(v, -1, 1) are the piecewise-linear
// stand-ins for the sigmoid and tanh.
//
// Schedule: one gate of one hidden neuron per clock, each clock evaluating the
// two dot products Wx.x and Wh.h (IN_N and H wide) side by side: 3*H cycles
// per step (216 for H = 72). The new state is collected apart and replaces h
// only at the end of the step. out_valid rises 3*H+1 cycles after the input
// handshake with the new h, which is also the output.
//
// Configuration bus (layer L_GRU): K_WEIGHT row = gate*H + neuron (gate 0 r,
// 1 z, 2 n), col < 128: input weight Wx[col], col >= 128: recurrent weight
// Wh[col-128]; K_BIAS row as above, col 0: bx, col 1: bh.
//
// The design description names a GRU-based memory unit after two linear
// layers; its width (72), the fixed-point formats, the activation
// approximations and the schedule are own choices. h resets to 0.
module gru_cell
  import kws_pkg::*;
#(
  parameter int unsigned IN_N  = NF,
  parameter int unsigned H     = NF,
  parameter int unsigned SHIFT = 7
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [IN_N-1:0][7:0] in_x,
  output logic                out_valid,
  input  logic                out_ready,
  output logic [H-1:0][7:0]   out_h,
  input  cfg_t                cfg
);
  localparam int unsigned NR = 3 * H;
  localparam int unsigned RW = $clog2(NR);
  localparam int unsigned OW = (H > 1) ? $clog2(H) : 1;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_e;

  logic [7:0]  wx [NR][IN_N];
  logic [7:0]  wh [NR][H];
  logic [31:0] bx [NR];
  logic [31:0] bh [NR];

  state_e               state;
  logic [IN_N-1:0][7:0] x;
  logic [H-1:0][7:0]    h, hn;
  logic [OW-1:0]        o;
  logic [1:0]           g;
  logic [7:0]           r_q, z_q;
  logic [RW-1:0]        row;
  logic signed [31:0]   dx, dh;
  logic [7:0]           gate_q, h_new;

  assign in_ready  = (state == S_IDLE);
  assign out_valid = (state == S_DONE);
  assign out_h     = h;
  assign row       = RW'(int'(g) * H + int'(o));

  function automatic logic [7:0] hsig(input logic [7:0] v);
    int s;
    s = ($signed(v) >>> 2) + 32;
    if (s < 0)  s = 0;
    if (s > 64) s = 64;
    return 8'(s);
  endfunction

  function automatic logic [7:0] htanh(input logic [7:0] v);
    if ($signed(v) > 8'sd64)  return 8'sd64;
    if ($signed(v) < -8'sd64) return -8'sd64;
    return v;
  endfunction

  always_comb begin
    logic signed [31:0] pre, rh;
    int                 hv;
    dx = $signed(bx[row]);
    for (int k = 0; k < int'(IN_N); k++) dx = dx + $signed(wx[row][k]) * $signed(x[k]);
    dh = $signed(bh[row]);
    for (int k = 0; k < int'(H); k++)    dh = dh + $signed(wh[row][k]) * $signed(h[k]);
    rh = ($signed({24'd0, r_q}) * dh) >>> 6;
    if (g == 2'd2) pre = dx + rh;
    else           pre = dx + dh;
    gate_q = (g == 2'd2) ? htanh(sat8(pre >>> SHIFT)) : hsig(sat8(pre >>> SHIFT));
    // new hidden value, used when g == 2 (z_q from the previous cycle)
    hv    = ((64 - int'(z_q)) * int'($signed(gate_q)) + int'(z_q) * int'($signed(h[o]))) >>> 6;
    h_new = 8'(hv);
  end

  always_ff @(posedge clk) begin
    if (cfg.we && cfg.layer == L_GRU && int'(cfg.row) < NR) begin
      if (cfg.kind == K_WEIGHT && cfg.col < 8'd128 && int'(cfg.col) < IN_N)
        wx[cfg.row][cfg.col] <= cfg.data[7:0];
      if (cfg.kind == K_WEIGHT && cfg.col >= 8'd128 && int'(cfg.col) - 128 < H)
        wh[cfg.row][cfg.col - 8'd128] <= cfg.data[7:0];
      if (cfg.kind == K_BIAS && cfg.col == 8'd0) bx[cfg.row] <= cfg.data;
      if (cfg.kind == K_BIAS && cfg.col == 8'd1) bh[cfg.row] <= cfg.data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      x     <= '0;
      h     <= '0;
      hn    <= '0;
      o     <= '0;
      g     <= '0;
      r_q   <= '0;
      z_q   <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (in_valid) begin
          x     <= in_x;
          o     <= '0;
          g     <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          unique case (g)
            2'd0: begin r_q <= gate_q; g <= 2'd1; end
            2'd1: begin z_q <= gate_q; g <= 2'd2; end
            default: begin
              logic [H-1:0][7:0] hv;
              hv    = hn;
              hv[o] = h_new;
              hn    <= hv;
              g     <= 2'd0;
              if (o == OW'(H - 1)) begin
                h     <= hv;
                state <= S_DONE;
              end else begin
                o <= o + 1'b1;
              end
            end
          endcase
        end
        S_DONE: if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
