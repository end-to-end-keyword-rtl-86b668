// lif_filter -- per-channel leaky integrate-and-fire event filter.
//
// Thins the sensor's event stream before graph generation. Every channel c
// keeps a potential v[c] and the timestamp of its last event. For each
// incoming event (t, c, p):
//     dt    = t - t_last[c]
//     v[c]  = max(0, v[c] - (dt >> DIV_FACTOR)) + W      (leak, then integrate)
//     t_last[c] = t
//     if v[c] >= theta[c]: pass the event on and set v[c] = 0
//     else:                drop it
// i.e. the potential leaks by one unit per 2^DIV_FACTOR microseconds. This is
// exactly the filtration algorithm of the design description; DIV_FACTOR = 8,
// W = 32 and thresholds falling exponentially from 64 (channel 0, highest
// frequency) to 32 (channel C-1) are its selected values.
//
// Thresholds: reset to round(TH_FIRST * (TH_LAST/TH_FIRST)^(c/(C-1))) (64 ->
// 32 over the channels by default, computed without real arithmetic) and
// writable at run time over the configuration bus (layer L_LIF, kind K_THRESH,
// row = channel, data[15:0] = threshold) -- the bus is an own addition.
//
// Timing: one event per clock, no stall. The decision is registered:
// out_valid/out follow in_valid/in by one cycle. The per-channel state is held
// in registers (2 x C words), so back-to-back events on one channel are exact.
// Potentials are V_W bits wide (own choice); with v < theta before the update
// they never exceed max(theta) + W.
module lif_filter
  import kws_pkg::*;
#(
  parameter int unsigned C          = 64,
  parameter int unsigned DIV_FACTOR = 8,
  parameter int unsigned W          = 32,
  parameter int unsigned TH_FIRST   = 64,
  parameter int unsigned TH_LAST    = 32,
  parameter int unsigned V_W        = 16
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  event_t in,
  input  cfg_t   cfg,
  output logic   out_valid,
  output event_t out
);
  // Exponentially spaced default thresholds, in integer arithmetic:
  // theta_c = TH_FIRST * 2^(-f), f = K_OCT * c / (C-1), with f in Q16 and
  // 2^(-frac) built from the constants round(2^16 * 2^(-2^-(i+1))).
  // TH_FIRST / TH_LAST must be a power of two, 2^K_OCT.
  localparam int unsigned K_OCT = $clog2(TH_FIRST / TH_LAST);
  localparam int unsigned EXP2_NEG [16] = '{46341, 55109, 60097, 62757, 64132, 64830,
                                            65182, 65359, 65447, 65492, 65514, 65525,
                                            65530, 65533, 65535, 65535};

  if ((TH_LAST << K_OCT) != TH_FIRST) begin : g_bad_ratio
    $error("lif_filter: TH_FIRST/TH_LAST must be a power of two");
  end

  function automatic logic [V_W-1:0] th_default(input int unsigned c);
    longint unsigned f, ip, fr, m;
    if (C < 2) return V_W'(TH_FIRST);
    f  = (longint'(K_OCT) * c * 65536) / (C - 1);
    ip = f >> 16;
    fr = f & 64'hffff;
    m  = 65536;
    for (int i = 0; i < 16; i++)
      if (fr[15 - i]) m = (m * EXP2_NEG[i] + 32768) >> 16;
    return V_W'((TH_FIRST * m + (64'd1 << (15 + ip))) >> (16 + ip));
  endfunction

  logic [TS_W-1:0] t_last [C];
  logic [V_W-1:0]  v      [C];
  logic [V_W-1:0]  theta  [C];

  logic [CH_W-1:0] c;
  logic [TS_W-1:0] dt, decay;
  logic [V_W-1:0]  v_new;
  logic            fire;

  always_comb begin
    c     = in.c;
    dt    = in.t - t_last[c];
    decay = dt >> DIV_FACTOR;
    if (decay >= TS_W'(v[c])) v_new = V_W'(W);
    else                      v_new = v[c] - V_W'(decay) + V_W'(W);
    fire  = (v_new >= theta[c]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < C; i++) begin
        t_last[i] <= '0;
        v[i]      <= '0;
        theta[i]  <= th_default(i);
      end
      out_valid <= 1'b0;
      out       <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid && (int'(in.c) < C)) begin
        t_last[c] <= in.t;
        v[c]      <= fire ? '0 : v_new;
        out_valid <= fire;
        out       <= in;
      end
      if (cfg.we && cfg.layer == L_LIF && cfg.kind == K_THRESH && int'(cfg.row) < C)
        theta[cfg.row] <= cfg.data[V_W-1:0];
    end
  end

endmodule
