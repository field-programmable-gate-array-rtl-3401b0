// fedam_fpga: FPGA top level of the front-end data acquisition module.
//
// Each PMT pulse is compared, in the FPGA's LVDS input buffers, with six
// threshold voltages set by board DACs. This logic turns the six comparator
// bits of every channel into time-over-threshold data: a 500 MHz free-running
// counter (hstc) is latched each time a threshold is crossed in either
// direction (pulse_capture), the records cross into the 50 MHz domain through
// a per-channel dual-clock FIFO (event_fifo), and a feeder (pio_feeder) offers
// them to the microcontroller as 32-bit words. The microcontroller sets the
// thresholds through dac_control and reads GPS-referenced time from
// pps_timer. The structure (counter shared by all channels, per-channel
// capture -> FIFO -> PIO feeder chain, DAC control, two clock domains) follows
// the source architecture; every block's insides are this design's own.
//
// Not in this module: the PLL (clk_hs is its 500 MHz output, an input here),
// the LVDS comparators (their outputs are cmp_in), the threshold DACs (driven
// through dac_sclk/dac_sdi/dac_cs_n) and the microcontroller system (all
// pio_*, capture_en, ovf_clear, flush, overflow, dac_* command and pps_*
// signals).
//
// Clocks and resets: clk_sys 50 MHz, clk_hs 500 MHz, asynchronous. `rst` is
// active high and asynchronous; it is synchronised to each clock and must be
// held for at least four clk_sys cycles. flush (50 MHz domain, per channel)
// empties the channel's FIFO and drops the record the feeder holds; the
// architecture shows control signals from the microcontroller to the pulse
// capture, the FIFO and the PIO feeder, and capture_en, flush and ovf_clear
// are this design's reading of them. capture_en and ovf_clear are level
// signals from the 50 MHz side, synchronised into clk_hs (2 cycles); overflow
// is synchronised back into clk_sys.
module fedam_fpga
  import fedam_pkg::*;
#(
  parameter int unsigned NCH        = NUM_CH,
  parameter int unsigned FIFO_DEPTH = 32
) (
  input  logic                          clk_sys,
  input  logic                          clk_hs,
  input  logic                          rst,
  // LVDS comparator outputs, one bit per threshold per channel
  input  logic [NCH-1:0][NUM_THR-1:0]   cmp_in,
  // GPS one pulse per second
  input  logic                          pps,
  // per-channel control and parallel I/O to the microcontroller
  input  logic [NCH-1:0]                capture_en,
  input  logic [NCH-1:0]                ovf_clear,
  input  logic [NCH-1:0]                flush,
  output logic [NCH-1:0]                overflow,
  output logic [NCH-1:0][PIO_W-1:0]     pio_data,
  output logic [NCH-1:0]                pio_valid,
  output logic [NCH-1:0]                pio_last,
  input  logic [NCH-1:0]                pio_ack,
  // threshold DAC programming
  input  logic                          dac_wr,
  input  logic [2:0]                    dac_sel,
  input  logic [DAC_W-1:0]              dac_data,
  output logic                          dac_busy,
  output logic                          dac_sclk,
  output logic                          dac_sdi,
  output logic [NUM_THR-1:0]            dac_cs_n,
  // GPS time reference
  output logic [TS_W-1:0]               pps_ts,
  output logic [TS_W-1:0]               pps_period,
  output logic                          pps_new
);
  logic            rst_hs, rst_sys;
  logic [TS_W-1:0] count;

  reset_sync u_rst_hs  (.clk(clk_hs),  .rst_in(rst), .rst_out(rst_hs));
  reset_sync u_rst_sys (.clk(clk_sys), .rst_in(rst), .rst_out(rst_sys));

  hstc #(.TS_W(TS_W)) u_hstc (.clk_hs(clk_hs), .rst_hs(rst_hs), .count(count));

  // control signals into the fast domain, overflow flags back out
  logic [NCH-1:0] cap_en_hs, ovf_clr_hs, ovf_hs;
  sync_2ff #(.W(NCH)) u_sync_en  (.clk(clk_hs),  .rst(rst_hs),  .d(capture_en), .q(cap_en_hs));
  sync_2ff #(.W(NCH)) u_sync_clr (.clk(clk_hs),  .rst(rst_hs),  .d(ovf_clear),  .q(ovf_clr_hs));
  sync_2ff #(.W(NCH)) u_sync_ovf (.clk(clk_sys), .rst(rst_sys), .d(ovf_hs),     .q(overflow));

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    logic               wr_en, full, empty, rd_en;
    event_t             wr_data, rd_data;

    pulse_capture u_cap (
      .clk_hs(clk_hs), .rst_hs(rst_hs), .cmp_in(cmp_in[c]), .count(count),
      .capture_en(cap_en_hs[c]), .ovf_clear(ovf_clr_hs[c]),
      .wr_en(wr_en), .wr_data(wr_data), .wr_full(full), .overflow(ovf_hs[c])
    );

    event_fifo #(.WIDTH(EVT_W), .DEPTH(FIFO_DEPTH)) u_fifo (
      .wclk(clk_hs), .wrst(rst_hs), .wr_en(wr_en), .wr_data(wr_data), .full(full),
      .rclk(clk_sys), .rrst(rst_sys), .rd_en(rd_en), .rd_flush(flush[c]),
      .rd_data(rd_data), .empty(empty)
    );

    pio_feeder u_feed (
      .clk(clk_sys), .rst(rst_sys), .fifo_empty(empty), .fifo_data(rd_data), .fifo_rd(rd_en), .flush(flush[c]),
      .pio_data(pio_data[c]), .pio_valid(pio_valid[c]), .pio_last(pio_last[c]), .pio_ack(pio_ack[c])
    );
  end

  dac_control u_dac (
    .clk(clk_sys), .rst(rst_sys), .wr(dac_wr), .sel(dac_sel), .data(dac_data),
    .busy(dac_busy), .sclk(dac_sclk), .sdi(dac_sdi), .cs_n(dac_cs_n)
  );

  pps_timer u_pps (
    .clk_hs(clk_hs), .rst_hs(rst_hs), .pps(pps), .count(count),
    .clk(clk_sys), .rst(rst_sys), .pps_ts(pps_ts), .pps_period(pps_period), .pps_new(pps_new)
  );
endmodule
