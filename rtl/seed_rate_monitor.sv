// seed_rate_monitor: per-seed trigger rate counters.
//
// The detector delivers one bunch crossing (BX) per clock at 40 MHz. The
// monitor counts, over a window of WINDOW consecutive clocks, how many valid
// events fired each seed and how many valid events were seen in total. On the
// last clock of each window the totals (including that clock's event) are
// copied to rate[] and n_events and rate_valid pulses for one clock; the
// counters then restart from zero. With the default WINDOW = 40,000,000 clocks
// (one second of beam) rate[s] reads directly in Hz, the unit in which trigger
// rates are monitored during data taking. Counters are CNT_W bits wide, enough
// for a seed that fires on every clock of the window, so they never overflow.
//
// The published design shows seed rates being monitored but not how; this
// windowed counter is the simplest circuit that produces such a rate.
module seed_rate_monitor #(
  parameter int unsigned NS     = 5,
  parameter int unsigned WINDOW = 40_000_000,
  parameter int unsigned CNT_W  = $clog2(WINDOW + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [NS-1:0]     trig,
  output logic              rate_valid,
  output logic [CNT_W-1:0]  rate [NS],
  output logic [CNT_W-1:0]  n_events
);

  localparam int unsigned TW = $clog2(WINDOW);

  initial begin
    assert (WINDOW >= 2) else $fatal(1, "seed_rate_monitor: WINDOW must be at least 2");
  end

  logic [TW-1:0]    tick;
  logic [CNT_W-1:0] cnt [NS];
  logic [CNT_W-1:0] ev_cnt;
  logic             last;

  assign last = (tick == TW'(WINDOW - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tick       <= '0;
      ev_cnt     <= '0;
      n_events   <= '0;
      rate_valid <= 1'b0;
      for (int s = 0; s < NS; s++) begin
        cnt[s]  <= '0;
        rate[s] <= '0;
      end
    end else begin
      rate_valid <= last;
      if (last) begin
        tick     <= '0;
        ev_cnt   <= '0;
        n_events <= ev_cnt + CNT_W'(in_valid);
        for (int s = 0; s < NS; s++) begin
          cnt[s]  <= '0;
          rate[s] <= cnt[s] + CNT_W'(in_valid && trig[s]);
        end
      end else begin
        tick   <= tick + 1'b1;
        ev_cnt <= ev_cnt + CNT_W'(in_valid);
        for (int s = 0; s < NS; s++)
          cnt[s] <= cnt[s] + CNT_W'(in_valid && trig[s]);
      end
    end
  end

endmodule
