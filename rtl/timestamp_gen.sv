// timestamp_gen -- receives address events from the auditory sensor, stamps
// each with a 1 us timestamp, and reports the end of every time window
// together with the timestamp of the last event that fell into it.
//
// Sensor side: the sensor's address-event (AER) output is a four-phase
// request/acknowledge handshake with bundled data. aer_addr = {channel,
// polarity}; it must be stable while aer_req is high. aer_req is synchronised
// by two flip-flops; on its synchronised rising edge the address is taken,
// stamped with the current microsecond count and aer_ack is raised; aer_ack
// falls after aer_req has fallen. One event therefore takes at least about six
// clock cycles of handshake, far below the 1 us timestamp resolution.
//
// Time base: a prescaler of CLK_PER_US clocks (200 at the 200 MHz system
// clock) advances the TS_W-bit microsecond counter `now_us`. A second counter
// divides it into windows of WINDOW_US microseconds (10 ms). When a window
// ends, note_valid pulses for one cycle with the window number, whether it
// held any event, the timestamp of its last event, and how many events were
// stamped in that last microsecond (n_last, saturating at 255; the handshake
// allows at most about CLK_PER_US/6 per microsecond): this is the "last
// timestamp in time window" path to the MaxPool stage. An event stamped in
// the very cycle the window ends still belongs to the old window.
//
// Output: ev_valid pulses for one cycle with the stamped event (t, c, p); the
// consumer cannot stall it (the sensor is not stallable either).
//
// From the design description: 1 us timestamps assigned as soon as the event
// is generated, the 10 ms window and the last-timestamp notice. Own choices:
// the handshake details, the address layout, the 32-bit counter width and the
// n_last count, which lets MaxPool tell the last of several events that share
// the final microsecond.
module timestamp_gen
  import kws_pkg::*;
#(
  parameter int unsigned CLK_PER_US = 200,
  parameter int unsigned WINDOW_US  = 10000
) (
  input  logic            clk,
  input  logic            rst_n,
  // AER from the sensor
  input  logic            aer_req,
  input  logic [CH_W:0]   aer_addr,
  output logic            aer_ack,
  // stamped events
  output logic            ev_valid,
  output event_t          ev,
  // window-end notices
  output logic            note_valid,
  output winnote_t        note,
  output logic [TS_W-1:0] now_us
);
  localparam int unsigned PW = (CLK_PER_US > 1) ? $clog2(CLK_PER_US) : 1;
  localparam int unsigned WW = $clog2(WINDOW_US);

  logic            req_s1, req_s2;
  logic [PW-1:0]   pre;
  logic [WW-1:0]   wus;
  logic [WIN_W-1:0] win;
  logic            has_ev;
  logic [TS_W-1:0] last_ts;
  logic [7:0]      last_cnt, cnt_next;
  logic            any_ev;
  logic            tick, wrap, stamp;

  assign tick  = (pre == PW'(CLK_PER_US - 1));
  assign wrap  = tick && (wus == WW'(WINDOW_US - 1));
  assign stamp = req_s2 && !aer_ack;

  // events stamped so far in the current microsecond of the latest event
  always_comb begin
    if (any_ev && last_ts == now_us) cnt_next = (last_cnt == 8'hff) ? last_cnt : last_cnt + 1'b1;
    else                             cnt_next = 8'd1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_s1     <= 1'b0;
      req_s2     <= 1'b0;
      aer_ack    <= 1'b0;
      pre        <= '0;
      now_us     <= '0;
      wus        <= '0;
      win        <= '0;
      has_ev     <= 1'b0;
      last_ts    <= '0;
      last_cnt   <= '0;
      any_ev     <= 1'b0;
      ev_valid   <= 1'b0;
      ev         <= '0;
      note_valid <= 1'b0;
      note       <= '0;
    end else begin
      req_s1 <= aer_req;
      req_s2 <= req_s1;

      // four-phase handshake
      ev_valid <= 1'b0;
      if (stamp) begin
        aer_ack  <= 1'b1;
        ev_valid <= 1'b1;
        ev.t     <= now_us;
        ev.c     <= aer_addr[CH_W:1];
        ev.p     <= aer_addr[0];
      end else if (!req_s2 && aer_ack) begin
        aer_ack <= 1'b0;
      end

      // microsecond time base
      pre <= tick ? '0 : pre + 1'b1;
      if (tick) begin
        now_us <= now_us + 1'b1;
        wus    <= wrap ? '0 : wus + 1'b1;
      end

      // last timestamp in the current window
      note_valid <= 1'b0;
      if (wrap) begin
        note_valid   <= 1'b1;
        note.win     <= win;
        note.has_ev  <= has_ev || stamp;
        note.last_ts <= stamp ? now_us : last_ts;
        note.n_last  <= stamp ? cnt_next : (has_ev ? last_cnt : 8'd0);
        win          <= win + 1'b1;
        has_ev       <= 1'b0;
      end else if (stamp) begin
        has_ev <= 1'b1;
      end
      if (stamp) begin
        last_ts  <= now_us;
        last_cnt <= cnt_next;
        any_ev   <= 1'b1;
      end
    end
  end

  // Every stamped event is acknowledged in the following cycle.
  a_ack_follows_req: assert property (@(posedge clk) disable iff (!rst_n)
                                      (stamp |=> aer_ack));

endmodule
