// tb_fedam_fpga: end-to-end test of the FPGA logic at its default size
// (3 channels, 6 thresholds, 64-bit counter, 32-record FIFOs).
//
// Around the design: a 50 MHz and a 500 MHz clock, six serial DAC models, an
// LVDS comparator model per channel and threshold, an analog pulse generator
// per channel, and a microcontroller model that reads the PIO words.
// The test pulse has the shape of the bench test of the source design:
// 2.6 V high, 20 ns linear leading edge, 60 ns linear trailing edge and 58 ns
// width at half height (hence an 18 ns flat top); the thresholds are the six
// levels 0.24, 0.50, 1.00, 1.50, 2.00 and 2.41 V.
//
// Checks and the mechanisms each must exercise at least once:
//   - DAC programming: each DAC model's voltage equals the written code.
//   - Capture: every threshold gives a rise and a fall record, thresholds
//     rise in ascending and fall in descending order, and the measured time
//     over threshold is within 2.5 ns of the analytic value (2 ns counter
//     quantisation plus the 0.25 ns step of the analog model).
//   - Shower timing: the delay between channels matches the injected delay
//     within 2.5 ns (the quantity the telescope uses for the shower angle).
//   - GPS time: pps_period equals the scaled PPS period in ticks, and pulse
//     time after the PPS edge, from pps_ts, is within 2.5 ns of the truth.
//   - Capture disable: a disabled channel produces no records.
//   - Overflow: with the microcontroller not reading, 3 pulses overflow the
//     FIFO, the flag rises, exactly FIFO depth + 1 records survive, and
//     ovf_clear clears the flag.
//   - Flush: a channel flushed while holding a pulse delivers nothing, the
//     other channels deliver all 12 records.
module tb_fedam_fpga;
  import fedam_pkg::*;
  localparam int NCH = NUM_CH;
  localparam real VH = 2.6, TR = 20.0, TTOP = 18.0, TF = 60.0;
  localparam real STEP = 0.25;        // analog model time step, ns
  localparam real VREF = 3.3;
  localparam int  PPS_TICKS = 10000;  // scaled GPS second: 20 us
  localparam real THR [NUM_THR] = '{0.24, 0.50, 1.00, 1.50, 2.00, 2.41};

  logic clk_sys = 0, clk_hs = 0, rst = 0, pps = 0;
  logic [NCH-1:0][NUM_THR-1:0] cmp_in;
  logic [NCH-1:0] capture_en = '0, ovf_clear = '0, flush = '0, overflow, pio_valid, pio_last, pio_ack;
  logic [NCH-1:0][PIO_W-1:0] pio_data;
  logic dac_wr = 0, dac_busy, dac_sclk, dac_sdi;
  logic [2:0] dac_sel = '0;
  logic [DAC_W-1:0] dac_data = '0;
  logic [NUM_THR-1:0] dac_cs_n;
  logic [TS_W-1:0] pps_ts, pps_period;
  logic pps_new;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_dac = 0, n_rec = 0, n_tot = 0, n_delay = 0, n_pps = 0, n_gps = 0, n_disabled = 0, n_ovf = 0, n_flush = 0;

  always #10 clk_sys = ~clk_sys;
  always #1  clk_hs  = ~clk_hs;

  fedam_fpga dut (
    .clk_sys(clk_sys), .clk_hs(clk_hs), .rst(rst), .cmp_in(cmp_in), .pps(pps),
    .capture_en(capture_en), .ovf_clear(ovf_clear), .flush(flush), .overflow(overflow),
    .pio_data(pio_data), .pio_valid(pio_valid), .pio_last(pio_last), .pio_ack(pio_ack),
    .dac_wr(dac_wr), .dac_sel(dac_sel), .dac_data(dac_data), .dac_busy(dac_busy),
    .dac_sclk(dac_sclk), .dac_sdi(dac_sdi), .dac_cs_n(dac_cs_n),
    .pps_ts(pps_ts), .pps_period(pps_period), .pps_new(pps_new));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- board: DACs, pulse generators, comparators ----------------
  real vth [NUM_THR];
  real vin [NCH];
  real t_start [NCH];   // start time of the current pulse per channel, ns

  for (genvar k = 0; k < NUM_THR; k++) begin : g_dac
    threshold_dac_model #(.VREF(VREF)) u_dac (.sclk(dac_sclk), .sdi(dac_sdi), .cs_n(dac_cs_n[k]), .vout(vth[k]));
  end

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    for (genvar k = 0; k < NUM_THR; k++) begin : g_thr
      lvds_comparator_model u_cmp (.vp(vin[c]), .vn(vth[k]), .out(cmp_in[c][k]));
    end
  end

  function automatic real pulse_v(input real t);
    if (t <= 0.0)              return 0.0;
    if (t < TR)                return VH * t / TR;
    if (t < TR + TTOP)         return VH;
    if (t < TR + TTOP + TF)    return VH * (1.0 - (t - TR - TTOP) / TF);
    return 0.0;
  endfunction

  // analytic crossing times relative to the pulse start
  function automatic real t_rise(input real v); return TR * v / VH; endfunction
  function automatic real t_fall(input real v); return TR + TTOP + TF * (1.0 - v / VH); endfunction

  initial begin
    foreach (t_start[c]) t_start[c] = -1.0e9;
    foreach (vin[c]) vin[c] = 0.0;
    forever begin
      #(STEP);
      foreach (vin[c]) vin[c] = pulse_v($realtime - t_start[c]);
    end
  end

  // ---------------- GPS 1PPS (scaled) ----------------
  real t_pps_q[$];
  initial begin
    #(5000.3);
    forever begin
      pps = 1; t_pps_q.push_back($realtime);
      #(1000.0) pps = 0;
      #(PPS_TICKS * 2.0 - 1000.0);
    end
  end
  logic [TS_W-1:0] pps_ts_seen;
  real t_pps_seen;
  bit pps_valid = 0;
  always @(posedge clk_sys) if (!rst && pps_new) begin
    n_pps++;
    if (n_pps > 1) chk(pps_period == PPS_TICKS, $sformatf("pps_period %0d", pps_period));
    pps_ts_seen = pps_ts; t_pps_seen = t_pps_q.pop_front(); pps_valid = 1;
  end

  // ---------------- microcontroller model ----------------
  typedef struct { logic [NUM_THR-1:0] lvl; logic [TS_W-1:0] ts; } rec_t;
  rec_t recs [NCH][$];
  bit mcu_run = 1;
  logic [NCH-1:0][PIO_W-1:0] w0, w1;
  int widx [NCH];
  initial foreach (widx[c]) widx[c] = 0;

  always @(negedge clk_sys) pio_ack <= mcu_run ? pio_valid : '0;
  always @(posedge clk_sys) for (int c = 0; c < NCH; c++) if (!rst && pio_valid[c] && pio_ack[c]) begin
    case (widx[c])
      0: begin w0[c] = pio_data[c]; widx[c] = 1; chk(pio_data[c][31:24] == REC_TAG && !pio_last[c], "record tag"); end
      1: begin w1[c] = pio_data[c]; widx[c] = 2; end
      default: begin
        rec_t r;
        r.lvl = w0[c][NUM_THR-1:0];
        r.ts  = {w1[c], pio_data[c]};
        chk(pio_last[c], "pio_last on word 2");
        recs[c].push_back(r);
        n_rec++;
        widx[c] = 0;
      end
    endcase
  end

  // ---------------- helpers ----------------
  task automatic dac_program(input int k, input real v);
    logic [15:0] code;
    code = 16'($rtoi(v / VREF * 65536.0 + 0.5));
    @(negedge clk_sys); dac_sel = 3'(k); dac_data = code; dac_wr = 1;
    @(negedge clk_sys); dac_wr = 0;
    wait (!dac_busy);
    repeat (2) @(posedge clk_sys);
    chk(vth[k] == real'(code) * VREF / 65536.0, $sformatf("DAC %0d output %f", k, vth[k]));
    n_dac++;
  endtask

  // Decode one channel's records into per-threshold rise/fall tick values.
  // Returns 0 if any threshold lacks a rise or fall.
  function automatic bit decode(input int c, output longint unsigned rise[NUM_THR], output longint unsigned fall[NUM_THR]);
    logic [NUM_THR-1:0] prev = '0;
    bit got_r[NUM_THR], got_f[NUM_THR];
    foreach (got_r[k]) begin got_r[k] = 0; got_f[k] = 0; rise[k] = 0; fall[k] = 0; end
    foreach (recs[c][i]) begin
      for (int k = 0; k < NUM_THR; k++) begin
        if (recs[c][i].lvl[k] && !prev[k] && !got_r[k]) begin rise[k] = recs[c][i].ts; got_r[k] = 1; end
        if (!recs[c][i].lvl[k] && prev[k] && got_r[k] && !got_f[k]) begin fall[k] = recs[c][i].ts; got_f[k] = 1; end
      end
      prev = recs[c][i].lvl;
    end
    decode = 1;
    foreach (got_r[k]) if (!got_r[k] || !got_f[k]) decode = 0;
  endfunction

  function automatic real absr(input real x); return x < 0.0 ? -x : x; endfunction

  // One shower: pulses on all channels with the given delays (ns); then check.
  task automatic shower(input real d[NCH], input logic [NCH-1:0] en);
    real t0;
    longint unsigned rise[NCH][NUM_THR], fall[NCH][NUM_THR];
    bit ok[NCH];
    foreach (recs[c]) recs[c].delete();
    @(posedge clk_hs);
    t0 = $realtime + 0.37;
    foreach (t_start[c]) t_start[c] = t0 + d[c];
    #(400.0);
    wait (pio_valid == '0);
    repeat (20) @(posedge clk_sys);
    for (int c = 0; c < NCH; c++) begin
      if (!en[c]) begin
        chk(recs[c].size() == 0, $sformatf("disabled channel %0d gave %0d records", c, recs[c].size()));
        n_disabled++;
        ok[c] = 0;
        continue;
      end
      ok[c] = decode(c, rise[c], fall[c]);
      chk(ok[c], $sformatf("channel %0d: incomplete pulse, %0d records", c, recs[c].size()));
      if (!ok[c]) continue;
      for (int k = 0; k < NUM_THR; k++) begin
        real tot_meas, tot_true;
        tot_meas = 2.0 * real'(fall[c][k] - rise[c][k]);
        tot_true = t_fall(THR[k]) - t_rise(THR[k]);
        chk(absr(tot_meas - tot_true) <= 2.5,
            $sformatf("ch%0d thr%0d ToT %.2f ns, true %.2f ns", c, k, tot_meas, tot_true));
        n_tot++;
        if (k > 0) chk(rise[c][k] >= rise[c][k-1] && fall[c][k] <= fall[c][k-1], "crossing order");
      end
      // GPS-referenced time of the lowest-threshold crossing
      if (pps_valid) begin
        real t_meas, t_true;
        t_meas = 2.0 * real'(longint'(rise[c][0] - pps_ts_seen));
        t_true = (t0 + d[c] + t_rise(THR[0])) - t_pps_seen;
        chk(absr(t_meas - t_true) <= 2.5, $sformatf("ch%0d time after PPS %.2f, true %.2f", c, t_meas, t_true));
        n_gps++;
      end
    end
    // inter-detector delays
    for (int c = 1; c < NCH; c++) if (ok[0] && ok[c]) begin
      real dm;
      dm = 2.0 * (real'(rise[c][0]) - real'(rise[0][0]));
      chk(absr(dm - (d[c] - d[0])) <= 2.5, $sformatf("delay ch%0d-ch0 %.2f, true %.2f", c, dm, d[c] - d[0]));
      n_delay++;
    end
  endtask

  // ---------------- test sequence ----------------
  initial begin
    real d[NCH];
    int nr;
    #0.5 rst = 1;     // a rising edge, as the reset synchronisers assert asynchronously
    repeat (5) @(posedge clk_sys);
    rst = 0;
    repeat (5) @(posedge clk_sys);
    for (int k = 0; k < NUM_THR; k++) dac_program(k, THR[k]);
    capture_en = '1;
    repeat (10) @(posedge clk_sys);
    // wait for a PPS reference
    wait (n_pps >= 1);
    // showers with random inter-detector delays
    for (int i = 0; i < 6; i++) begin
      foreach (d[c]) d[c] = real'($urandom_range(0, 400)) / 10.0;
      shower(d, '1);
      repeat ($urandom_range(5, 50)) @(posedge clk_sys);
    end
    // channel 1 disabled
    capture_en = 3'b101;
    repeat (5) @(posedge clk_sys);
    foreach (d[c]) d[c] = 5.0 * c;
    shower(d, 3'b101);
    capture_en = '1;
    repeat (5) @(posedge clk_sys);
    // overflow: the microcontroller stops reading; 3 pulses = 36 records
    mcu_run = 0;
    foreach (recs[c]) recs[c].delete();
    for (int p = 0; p < 3; p++) begin
      @(posedge clk_hs);
      foreach (t_start[c]) t_start[c] = $realtime + 0.37;
      #(300.0);
    end
    repeat (10) @(posedge clk_sys);
    chk(overflow == '1, $sformatf("overflow flags %b", overflow));
    if (overflow == '1) n_ovf++;
    mcu_run = 1;
    repeat (300) @(posedge clk_sys);
    for (int c = 0; c < NCH; c++) begin
      nr = recs[c].size();
      chk(nr == 32 + 1, $sformatf("ch%0d kept %0d records after overflow", c, nr));
    end
    chk(overflow == '1, "overflow flag sticky");
    ovf_clear = '1;
    repeat (5) @(posedge clk_sys);
    ovf_clear = '0;
    repeat (5) @(posedge clk_sys);
    chk(overflow == '0, "ovf_clear");
    // flush: channel 0 discards a stored pulse, the others keep theirs
    mcu_run = 0;
    foreach (recs[c]) recs[c].delete();
    @(posedge clk_hs);
    foreach (t_start[c]) t_start[c] = $realtime + 0.37;
    #(300.0);
    repeat (5) @(posedge clk_sys);
    @(negedge clk_sys) flush[0] = 1;
    repeat (2) @(negedge clk_sys);
    flush[0] = 0;
    mcu_run = 1;
    repeat (200) @(posedge clk_sys);
    chk(recs[0].size() == 0, $sformatf("flushed channel gave %0d records", recs[0].size()));
    for (int c = 1; c < NCH; c++) chk(recs[c].size() == 12, $sformatf("ch%0d gave %0d records, expected 12", c, recs[c].size()));
    if (recs[0].size() == 0) n_flush++;
    // normal operation again
    foreach (d[c]) d[c] = 3.0 * c;
    shower(d, '1);
    // wait for another PPS so the period is checked
    wait (n_pps >= 3);
    repeat (5) @(posedge clk_sys);

    chk(n_dac  == NUM_THR, "DAC programming happened");
    chk(n_rec  > 0,  "records read");
    chk(n_tot  > 0,  "time-over-threshold checked");
    chk(n_delay > 0, "inter-detector delay checked");
    chk(n_pps  >= 2, "PPS period seen");
    chk(n_gps  > 0,  "GPS-referenced time checked");
    chk(n_disabled > 0, "capture disable exercised");
    chk(n_ovf  > 0,  "overflow exercised");
    chk(n_flush > 0, "flush exercised");
    $display("mechanisms: dac=%0d records=%0d tot=%0d delay=%0d pps=%0d gps=%0d disabled=%0d overflow=%0d flush=%0d",
             n_dac, n_rec, n_tot, n_delay, n_pps, n_gps, n_disabled, n_ovf, n_flush);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
