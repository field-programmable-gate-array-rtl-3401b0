// tb_resolution: time-resolution measurement on the full design at its
// default size. Pulses of the bench-test shape (2.6 V, 20 ns leading and
// 60 ns trailing edge) with a random flat-top length (10-30 ns) and a random
// start phase against the 2 ns counter are fed to all three channels through
// the DAC and comparator models, with the analog waveform stepped every
// 0.02 ns. For every threshold the time over threshold is measured from the
// records and compared with its analytic value.
//
// With both crossing instants falling at independent, uniformly distributed
// positions inside a 2 ns tick, the width error is triangular on (-2, +2) ns
// with standard deviation 2/sqrt(6) = 0.82 ns. Dropping the counter LSB
// (the 4 ns reconstruction) doubles it to 1.63 ns. The test checks that
// every error lies inside the triangle's support, that the mean is near zero
// and that both standard deviations are within 10 % of theory.
module tb_resolution;
  import fedam_pkg::*;
  localparam int NCH = NUM_CH;
  localparam real VH = 2.6, TR = 20.0, TF = 60.0, STEP = 0.02, VREF = 3.3;
  localparam real THR [NUM_THR] = '{0.24, 0.50, 1.00, 1.50, 2.00, 2.41};
  localparam int  SHOTS = 120;

  logic clk_sys = 0, clk_hs = 0, rst = 0;
  logic [NCH-1:0][NUM_THR-1:0] cmp_in;
  logic [NCH-1:0] overflow, pio_valid, pio_last, pio_ack;
  logic [NCH-1:0][PIO_W-1:0] pio_data;
  logic dac_wr = 0, dac_busy, dac_sclk, dac_sdi, pps_new;
  logic [2:0] dac_sel = '0;
  logic [DAC_W-1:0] dac_data = '0;
  logic [NUM_THR-1:0] dac_cs_n;
  logic [TS_W-1:0] pps_ts, pps_period;
  int checks = 0, failures = 0;

  always #10 clk_sys = ~clk_sys;
  always #1  clk_hs  = ~clk_hs;

  fedam_fpga dut (
    .clk_sys(clk_sys), .clk_hs(clk_hs), .rst(rst), .cmp_in(cmp_in), .pps(1'b0),
    .capture_en('1), .ovf_clear('0), .flush('0), .overflow(overflow),
    .pio_data(pio_data), .pio_valid(pio_valid), .pio_last(pio_last), .pio_ack(pio_ack),
    .dac_wr(dac_wr), .dac_sel(dac_sel), .dac_data(dac_data), .dac_busy(dac_busy),
    .dac_sclk(dac_sclk), .dac_sdi(dac_sdi), .dac_cs_n(dac_cs_n),
    .pps_ts(pps_ts), .pps_period(pps_period), .pps_new(pps_new));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  real vth [NUM_THR];
  real vin [NCH];
  real t_start [NCH];
  real ttop;
  for (genvar k = 0; k < NUM_THR; k++) begin : g_dac
    threshold_dac_model #(.VREF(VREF)) u_dac (.sclk(dac_sclk), .sdi(dac_sdi), .cs_n(dac_cs_n[k]), .vout(vth[k]));
  end
  for (genvar c = 0; c < NCH; c++) begin : g_ch
    for (genvar k = 0; k < NUM_THR; k++) begin : g_thr
      lvds_comparator_model u_cmp (.vp(vin[c]), .vn(vth[k]), .out(cmp_in[c][k]));
    end
  end

  function automatic real pulse_v(input real t);
    if (t <= 0.0)            return 0.0;
    if (t < TR)              return VH * t / TR;
    if (t < TR + ttop)       return VH;
    if (t < TR + ttop + TF)  return VH * (1.0 - (t - TR - ttop) / TF);
    return 0.0;
  endfunction

  initial begin
    ttop = 18.0;
    foreach (t_start[c]) t_start[c] = -1.0e9;
    foreach (vin[c]) vin[c] = 0.0;
    forever begin
      #(STEP);
      foreach (vin[c]) vin[c] = pulse_v($realtime - t_start[c]);
    end
  end

  // microcontroller: read every record
  typedef struct { logic [NUM_THR-1:0] lvl; logic [TS_W-1:0] ts; } rec_t;
  rec_t recs [NCH][$];
  logic [NCH-1:0][PIO_W-1:0] w0, w1;
  int widx [NCH];
  initial foreach (widx[c]) widx[c] = 0;
  always @(negedge clk_sys) pio_ack <= pio_valid;
  always @(posedge clk_sys) for (int c = 0; c < NCH; c++) if (!rst && pio_valid[c] && pio_ack[c]) begin
    if (widx[c] == 0) begin w0[c] = pio_data[c]; widx[c] = 1; end
    else if (widx[c] == 1) begin w1[c] = pio_data[c]; widx[c] = 2; end
    else begin
      rec_t r;
      r.lvl = w0[c][NUM_THR-1:0];
      r.ts  = {w1[c], pio_data[c]};
      recs[c].push_back(r);
      widx[c] = 0;
    end
  end

  task automatic dac_program(input int k, input real v);
    @(negedge clk_sys); dac_sel = 3'(k); dac_data = 16'($rtoi(v / VREF * 65536.0 + 0.5)); dac_wr = 1;
    @(negedge clk_sys); dac_wr = 0;
    wait (!dac_busy);
    repeat (2) @(posedge clk_sys);
  endtask

  function automatic real absr(input real x); return x < 0.0 ? -x : x; endfunction

  real sum2 = 0.0, sumsq2 = 0.0, sum4 = 0.0, sumsq4 = 0.0, maxabs2 = 0.0;
  int  n = 0;

  initial begin
    #0.5 rst = 1;
    repeat (5) @(posedge clk_sys);
    rst = 0;
    repeat (5) @(posedge clk_sys);
    for (int k = 0; k < NUM_THR; k++) dac_program(k, THR[k]);
    repeat (10) @(posedge clk_sys);
    for (int s = 0; s < SHOTS; s++) begin
      foreach (recs[c]) recs[c].delete();
      ttop = 10.0 + real'($urandom_range(0, 20000)) / 1000.0;
      foreach (t_start[c]) t_start[c] = $realtime + real'($urandom_range(0, 9999)) / 1000.0;
      #(250.0);
      wait (pio_valid == '0);
      repeat (10) @(posedge clk_sys);
      for (int c = 0; c < NCH; c++) begin
        longint unsigned rise[NUM_THR], fall[NUM_THR];
        bit got_r[NUM_THR], got_f[NUM_THR];
        logic [NUM_THR-1:0] prev;
        prev = '0;
        foreach (got_r[k]) begin got_r[k] = 0; got_f[k] = 0; rise[k] = 0; fall[k] = 0; end
        foreach (recs[c][i]) begin
          for (int k = 0; k < NUM_THR; k++) begin
            if (recs[c][i].lvl[k] && !prev[k] && !got_r[k]) begin rise[k] = recs[c][i].ts; got_r[k] = 1; end
            if (!recs[c][i].lvl[k] && prev[k] && got_r[k] && !got_f[k]) begin fall[k] = recs[c][i].ts; got_f[k] = 1; end
          end
          prev = recs[c][i].lvl;
        end
        for (int k = 0; k < NUM_THR; k++) begin
          real tt, e2, e4;
          chk(got_r[k] && got_f[k], $sformatf("shot %0d ch%0d thr%0d incomplete", s, c, k));
          tt = (TR + ttop + TF * (1.0 - vth[k] / VH)) - TR * vth[k] / VH;
          e2 = 2.0 * real'(fall[k] - rise[k]) - tt;
          e4 = 4.0 * real'((fall[k] >> 1) - (rise[k] >> 1)) - tt;
          chk(absr(e2) < 2.0 + 2.0 * STEP, $sformatf("width error %.3f ns outside +-2 ns", e2));
          sum2 += e2; sumsq2 += e2 * e2; sum4 += e4; sumsq4 += e4 * e4; n++;
          if (absr(e2) > maxabs2) maxabs2 = absr(e2);
        end
      end
    end
    begin
      real m2, s2, m4, s4;
      m2 = sum2 / n; s2 = $sqrt(sumsq2 / n - m2 * m2);
      m4 = sum4 / n; s4 = $sqrt(sumsq4 / n - m4 * m4);
      $display("samples=%0d  2 ns: mean %.3f ns, std %.3f ns, max |err| %.3f ns   4 ns: mean %.3f ns, std %.3f ns",
               n, m2, s2, maxabs2, m4, s4);
      chk(absr(m2) < 0.2, "2 ns mean error near zero");
      chk(s2 > 0.82 * 0.9 && s2 < 0.82 * 1.1, $sformatf("2 ns std %.3f, theory 0.816", s2));
      chk(s4 > 1.63 * 0.9 && s4 < 1.63 * 1.1, $sformatf("4 ns std %.3f, theory 1.633", s4));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
