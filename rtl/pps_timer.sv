// pps_timer: ties the high-speed time counter to GPS time.
//
// The GPS receiver's 1 PPS output is synchronised into the 500 MHz domain and
// its rising edge is detected. On each edge the counter value is latched
// (pps_ts) and the number of counter ticks since the previous edge
// (pps_period) is computed; the firmware turns a pulse timestamp T into
// absolute time as  second + (T - pps_ts) / pps_period,  which calibrates the
// 500 MHz clock against GPS every second. Counting reference-oscillator
// cycles between 1 PPS edges follows the source design; using the time
// counter itself as that oscillator, and the clock-domain hand-off, are this
// design's own.
//
// Clock-domain hand-off: with each new pair of values a toggle bit flips in
// the fast domain. The 50 MHz side synchronises the toggle and, when it sees
// it change, copies both values, which have then been stable for at least two
// slow cycles and will stay stable for close to a second. pps_new pulses for
// one clk cycle when the copies are updated. pps_period is 0 after the first
// edge following reset.
//
// Timing: pps_ts holds the counter value two ticks after the PPS edge arrived;
// pps_new follows a PPS rising edge by 3 clk_hs cycles plus 3 to 4
// clk cycles.
module pps_timer
  import fedam_pkg::*;
(
  input  logic            clk_hs,
  input  logic            rst_hs,
  input  logic            pps,
  input  logic [TS_W-1:0] count,
  input  logic            clk,
  input  logic            rst,
  output logic [TS_W-1:0] pps_ts,
  output logic [TS_W-1:0] pps_period,
  output logic            pps_new
);
  // ---- fast domain ----
  logic            pps_s, pps_d, have_prev, tog_hs;
  logic [TS_W-1:0] ts_hs, per_hs;

  sync_2ff u_sync_pps (.clk(clk_hs), .rst(rst_hs), .d(pps), .q(pps_s));

  always_ff @(posedge clk_hs) begin
    if (rst_hs) begin
      pps_d     <= 1'b0;
      have_prev <= 1'b0;
      tog_hs    <= 1'b0;
      ts_hs     <= '0;
      per_hs    <= '0;
    end else begin
      pps_d <= pps_s;
      if (pps_s && !pps_d) begin
        ts_hs     <= count;
        per_hs    <= have_prev ? count - ts_hs : '0;
        have_prev <= 1'b1;
        tog_hs    <= ~tog_hs;
      end
    end
  end

  // ---- slow domain ----
  logic tog_s, tog_d;
  sync_2ff u_sync_tog (.clk(clk), .rst(rst), .d(tog_hs), .q(tog_s));

  always_ff @(posedge clk) begin
    if (rst) begin
      tog_d      <= 1'b0;
      pps_new    <= 1'b0;
      pps_ts     <= '0;
      pps_period <= '0;
    end else begin
      tog_d   <= tog_s;
      pps_new <= (tog_s != tog_d);
      if (tog_s != tog_d) begin
        pps_ts     <= ts_hs;
        pps_period <= per_hs;
      end
    end
  end
endmodule
