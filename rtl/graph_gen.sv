// graph_gen -- turns each filtered event into a graph vertex with directed
// edges to earlier events (a time-directed graph).
//
// Neighbourhood: for a new event (t, c) the candidate neighbours lie on the
// channels c+d with d = -R_C, -R_C+SKIP, ..., -SKIP, +SKIP, ..., +R_C
// (2*R_C/SKIP candidates, 20 for the selected R_C = 10, SKIP = 1), and among
// the events on such a channel only its most recent one is kept. That event
// becomes a neighbour when it is RT_LOW..RT_HIGH microseconds older than the
// new one (0..5000 selected). The vertex's own earlier event on channel c is
// not a neighbour; the self-loop is added by the convolution itself, giving at
// most 20 neighbours plus a self-loop.
//
// State: a table of the last timestamp (and a seen flag) of every channel,
// updated with the new event after its edges are formed.
//
// Output: a gjob_t with the event, the neighbour count and the compacted
// list of (channel, age in us) per neighbour, in increasing d order.
//
// Timing: one event per clock when the consumer is ready; the result is
// registered (one cycle latency). in_ready = output slot free or being taken.
//
// From the design description: the half-sphere neighbourhood with channel
// radius, skip step and lower/upper time radius, and the bound of 20
// neighbours plus self-loop. Own choice: one neighbour per channel (its latest
// event), which is what that bound implies.
module graph_gen
  import kws_pkg::*;
#(
  parameter int unsigned C       = 64,
  parameter int unsigned R_C     = 10,
  parameter int unsigned SKIP    = 1,
  parameter int unsigned RT_LOW  = 0,
  parameter int unsigned RT_HIGH = 5000
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  output logic   in_ready,
  input  event_t in,
  output logic   out_valid,
  input  logic   out_ready,
  output gjob_t  out
);
  localparam int unsigned NHALF = R_C / SKIP;
  localparam int unsigned NCAND = 2 * NHALF;

  if (NCAND > MAX_E) begin : g_bad_radius
    $error("graph_gen: 2*R_C/SKIP exceeds MAX_E");
  end

  logic [TS_W-1:0] last_t [C];
  logic            seen   [C];
  gjob_t           job;
  logic            take;

  assign in_ready = !out_valid || out_ready;
  assign take     = in_valid && in_ready;

  always_comb begin
    int              d, ch, n;
    logic [TS_W-1:0] dt;
    job       = '0;
    job.ev    = in;
    n         = 0;
    d         = 0;
    ch        = 0;
    dt        = '0;
    for (int k = 0; k < NCAND; k++) begin
      if (k < NHALF) d = -int'(R_C) + k * int'(SKIP);
      else           d = (k - int'(NHALF) + 1) * int'(SKIP);
      ch = int'(in.c) + d;
      if (ch >= 0 && ch < int'(C)) begin
        dt = in.t - last_t[ch];
        if (seen[ch] && dt >= TS_W'(RT_LOW) && dt <= TS_W'(RT_HIGH)) begin
          job.edges[n].c  = CH_W'(ch);
          job.edges[n].dt = DT_W'(dt);
          n++;
        end
      end
    end
    job.ne = NE_W'(n);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < C; i++) begin
        last_t[i] <= '0;
        seen[i]   <= 1'b0;
      end
      out_valid <= 1'b0;
      out       <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (take) begin
        out_valid <= 1'b1;
        out       <= job;
        if (int'(in.c) < C) begin
          last_t[in.c] <= in.t;
          seen[in.c]   <= 1'b1;
        end
      end
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 (out_valid && !out_ready) |=> (out_valid && $stable(out)));

endmodule
