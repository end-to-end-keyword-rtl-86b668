// mlp_layer -- one fully connected layer of the network head, computed one
// output neuron per clock.
//
//     y[o] = act(q(b[o] + sum_k W[o][k] * x[k])),   o = 0 .. OUT_N-1
//
// with q() an arithmetic right shift by SHIFT saturated to int8 and act()
// ReLU when RELU = 1, identity otherwise. All values are two's complement.
//
// Timing: the input vector is taken in one handshake (in_ready only when
// idle), then OUT_N cycles compute one neuron each with an IN_N-wide dot
// product, and out_valid rises OUT_N+1 cycles after the input handshake; the
// layer accepts again the cycle after its output is taken.
//
// Weights/biases come over the configuration bus (layer LAYER; K_WEIGHT:
// row = o, col = k, data[7:0]; K_BIAS: row = o, data = 32-bit bias).
//
// The head's four linear layers (two before the recurrent unit, one class and
// one confidence output after it) are described by the design; their widths
// beyond the 72-feature input, the activation functions, the requantisation
// and the one-neuron-per-cycle schedule are own choices.
module mlp_layer
  import kws_pkg::*;
#(
  parameter int unsigned IN_N  = NF,
  parameter int unsigned OUT_N = NF,
  parameter bit          RELU  = 1'b1,
  parameter int unsigned SHIFT = 7,
  parameter layer_e      LAYER = L_MLP1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [IN_N-1:0][7:0]   in_x,
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [OUT_N-1:0][7:0]  out_y,
  input  cfg_t                   cfg
);
  localparam int unsigned OW = (OUT_N > 1) ? $clog2(OUT_N) : 1;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_e;

  logic [7:0]  w_mem [OUT_N][IN_N];
  logic [31:0] b_mem [OUT_N];

  state_e                state;
  logic [IN_N-1:0][7:0]  x;
  logic [OW-1:0]         o;
  logic [7:0]            y;

  assign in_ready  = (state == S_IDLE);
  assign out_valid = (state == S_DONE);

  always_comb begin
    logic signed [31:0] acc;
    acc = $signed(b_mem[o]);
    for (int k = 0; k < int'(IN_N); k++)
      acc = acc + $signed(w_mem[o][k]) * $signed(x[k]);
    y = RELU ? relu_q(acc, SHIFT) : sat8(acc >>> SHIFT);
  end

  always_ff @(posedge clk) begin
    if (cfg.we && cfg.layer == LAYER) begin
      if (cfg.kind == K_WEIGHT && int'(cfg.row) < OUT_N && int'(cfg.col) < IN_N)
        w_mem[cfg.row][cfg.col] <= cfg.data[7:0];
      if (cfg.kind == K_BIAS && int'(cfg.row) < OUT_N)
        b_mem[cfg.row] <= cfg.data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      x     <= '0;
      o     <= '0;
      out_y <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (in_valid) begin
          x     <= in_x;
          o     <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          out_y[o] <= y;
          if (o == OW'(OUT_N - 1)) state <= S_DONE;
          else                     o <= o + 1'b1;
        end
        S_DONE: if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
