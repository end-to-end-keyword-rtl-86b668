// maxpool_window -- element-wise max of the last graph-convolution outputs
// over a 10 ms time window, closed by timestamp propagation.
//
// Every vertex leaving the fourth PointNetConv layer is folded into a running
// 72-feature maximum (features are ReLU outputs, so the empty maximum is 0).
// The window is closed, the pooled vector handed to the network head and the
// maximum cleared, when the window-end notice from the timestamp generator
// (window number and timestamp of the window's last sensor event) is pending
// and one of these holds:
//   * CAUSE_LAST  - the vertices carrying that last timestamp have all been
//                   merged: the running (timestamp, count) of the latest
//                   merged vertex equals the notice's (last_ts, n_last), also
//                   when they were merged before the notice arrived (the
//                   normal case of the timestamp-propagation mechanism);
//   * CAUSE_LATER - the next vertex to arrive is younger than that timestamp
//                   (or the window had no events), so it belongs to a later
//                   window and waits until this one is closed;
//   * CAUSE_DRAIN - nothing is left anywhere upstream (pipe_empty), which is
//                   what happens when the window's last events were removed by
//                   the event filter or the window was empty.
// Events arrive in timestamp order, so these rules assign every vertex to the
// window its timestamp lies in, also when several events share the window's
// last microsecond (if some of those are filtered out, the count is never
// reached and LATER or DRAIN closes the window instead).
//
// Notices are queued (NOTE_DEPTH deep). Output: out_valid/out_ready with the
// pooled vector, the window number, the number of vertices pooled and the
// closing cause; the next close waits until the output has been taken, and
// so does every merge while a close is due.
//
// From the design description: 10 ms windows, max aggregation, forwarding only
// after the window's final event has been processed. Own choices: the
// drain/later-event rules that stop a filtered-out last event from blocking
// the window, and the queue depth.
module maxpool_window
  import kws_pkg::*;
#(
  parameter int unsigned NOTE_DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  cjob_t            in,
  input  logic             note_valid,
  input  winnote_t         note,
  input  logic             pipe_empty,
  output logic             out_valid,
  input  logic             out_ready,
  output fvec_t            out_x,
  output logic [WIN_W-1:0] out_win,
  output logic [15:0]      out_nev,
  output logic [1:0]       out_cause
);
  localparam logic [1:0] CAUSE_LAST  = 2'd0;
  localparam logic [1:0] CAUSE_LATER = 2'd1;
  localparam logic [1:0] CAUSE_DRAIN = 2'd2;

  logic     pend, pop;
  winnote_t pn;
  fvec_t    acc;
  logic [15:0] nev;
  logic [TS_W-1:0] mt;     // timestamp of the latest merged vertex
  logic [7:0]      mcnt;   // merged vertices with that timestamp (0: none)
  logic     in_late, close_req, close, merge;
  logic [1:0] cause;

  sync_fifo #(.T(winnote_t), .DEPTH(NOTE_DEPTH)) u_notes (
    .clk, .rst_n,
    .in_valid (note_valid), .in_ready (), .in_data (note),
    .out_valid(pend), .out_ready(pop), .out_data(pn),
    .count(), .overflow()
  );

  always_comb begin
    in_late   = in_valid && (!pn.has_ev || ts_after(in.g.ev.t, pn.last_ts));
    cause     = CAUSE_DRAIN;
    close_req = 1'b0;
    if (pend) begin
      if (pn.has_ev && mcnt != '0 && mt == pn.last_ts && mcnt == pn.n_last) begin
        close_req = 1'b1;
        cause     = CAUSE_LAST;
      end else if (in_late) begin
        close_req = 1'b1;
        cause     = CAUSE_LATER;
      end else if (pipe_empty && !in_valid) begin
        close_req = 1'b1;
        cause     = CAUSE_DRAIN;
      end
    end
    close    = close_req && !out_valid;
    in_ready = !close_req && !(pend && in_late);
    merge    = in_valid && in_ready;
    pop      = close;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc         <= '0;
      nev         <= '0;
      mt          <= '0;
      mcnt        <= '0;
      out_valid   <= 1'b0;
      out_x       <= '0;
      out_win     <= '0;
      out_nev     <= '0;
      out_cause   <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (merge) begin
        for (int k = 0; k < int'(NF); k++)
          if ($signed(in.x[k]) > $signed(acc[k])) acc[k] <= in.x[k];
        nev <= nev + 1'b1;
        if (mcnt != '0 && in.g.ev.t == mt) begin
          if (mcnt != 8'hff) mcnt <= mcnt + 1'b1;
        end else begin
          mt   <= in.g.ev.t;
          mcnt <= 8'd1;
        end
      end
      if (close) begin
        out_valid   <= 1'b1;
        out_x       <= acc;
        out_win     <= pn.win;
        out_nev     <= nev;
        out_cause   <= cause;
        acc         <= '0;
        nev         <= '0;
        mcnt        <= '0;
      end
    end
  end

  a_no_merge_on_close: assert property (@(posedge clk) disable iff (!rst_n) !(merge && close));

endmodule
