// pulse_capture: time-over-threshold capture for one PMT channel.
//
// The comparator bits (one per threshold, high while the pulse is above that
// threshold) arrive asynchronously from the LVDS input comparators. They are
// brought into the 500 MHz domain by a two-flop synchroniser; the synchronised
// vector is compared with its value one cycle earlier. Every change, i.e.
// every threshold crossed from below or from above, produces one record
// {new comparator state, time counter value}. Several thresholds crossed in
// the same 2 ns tick share one record. The rise and fall time of threshold k
// are the timestamps of the records in which bit k turns 1 and turns 0; their
// difference is the time over threshold. Latching the counter on both
// crossings follows the source design; the record format, the synchroniser
// and the overflow policy are this design's own.
//
// Interface: the record is written into the channel FIFO through wr_en /
// wr_data. If the FIFO is full the record is dropped and the sticky
// `overflow` flag is set until ovf_clear. While capture_en is low nothing is
// written (the previous-state register keeps tracking, so re-enabling does not
// create a false crossing).
//
// Timing: a comparator change that is set up before clk_hs edge k is seen in
// the cycle after edge k+1; the counter value of that cycle (two ticks after
// the one in which the change arrived) is latched at edge k+2 and written
// (wr_en high) in the cycle after it. This fixed offset is the same for every
// crossing and cancels in the time-over-threshold differences. Changes on
// consecutive cycles are all recorded (one record per cycle).
module pulse_capture
  import fedam_pkg::*;
#(
  parameter int unsigned NTHR = NUM_THR
) (
  input  logic            clk_hs,
  input  logic            rst_hs,
  input  logic [NTHR-1:0] cmp_in,
  input  logic [TS_W-1:0] count,
  input  logic            capture_en,
  input  logic            ovf_clear,
  output logic            wr_en,
  output logic [NTHR+TS_W-1:0] wr_data,
  input  logic            wr_full,
  output logic            overflow
);
  logic [NTHR-1:0] cmp_s;     // synchronised comparator state
  logic [NTHR-1:0] cmp_prev;  // state one cycle earlier
  logic            change;

  sync_2ff #(.W(NTHR)) u_sync (
    .clk(clk_hs), .rst(rst_hs), .d(cmp_in), .q(cmp_s)
  );

  always_ff @(posedge clk_hs) begin
    if (rst_hs) cmp_prev <= '0;
    else        cmp_prev <= cmp_s;
  end

  assign change = (cmp_s != cmp_prev) && capture_en;

  // The counter value is latched together with the new state in the cycle the
  // change is seen; the latched record is written one cycle later.
  logic                   lat_valid;
  logic [NTHR+TS_W-1:0]   lat_data;
  always_ff @(posedge clk_hs) begin
    if (rst_hs) begin
      lat_valid <= 1'b0;
      lat_data  <= '0;
    end else begin
      lat_valid <= change;
      if (change) lat_data <= {cmp_s, count};
    end
  end

  assign wr_en   = lat_valid && !wr_full;
  assign wr_data = lat_data;

  always_ff @(posedge clk_hs) begin
    if (rst_hs || ovf_clear)       overflow <= 1'b0;
    else if (lat_valid && wr_full) overflow <= 1'b1;
  end

  // A record is never written into a full FIFO.
  a_no_write_full: assert property (@(posedge clk_hs) disable iff (rst_hs) wr_en |-> !wr_full);
endmodule
