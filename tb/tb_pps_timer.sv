// tb_pps_timer: a 500 MHz counter and a 50 MHz system clock, and a PPS input
// whose period is scaled down to a few thousand counter ticks and varied from
// second to second. Each PPS rising edge must give one pps_new strobe with
// pps_ts equal to the counter value two ticks after the edge arrived (the
// two synchroniser stages), and pps_period equal to the
// number of ticks between the last two edges (0 after the first edge).
module tb_pps_timer;
  import fedam_pkg::*;
  logic clk_hs = 0, clk = 0, rst = 1, pps = 0;
  logic [TS_W-1:0] cnt = '0, pps_ts, pps_period;
  logic pps_new;
  int checks = 0, failures = 0;
  longint unsigned exp_ts[$];
  int strobes = 0;

  always #1 clk_hs = ~clk_hs;
  always #10 clk = ~clk;
  always_ff @(posedge clk_hs) cnt <= cnt + 1;

  pps_timer dut (.clk_hs(clk_hs), .rst_hs(rst), .pps(pps), .count(cnt),
    .clk(clk), .rst(rst), .pps_ts(pps_ts), .pps_period(pps_period), .pps_new(pps_new));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  longint unsigned prev_ts;
  bit have_prev = 0;
  always @(posedge clk) if (!rst && pps_new) begin
    longint unsigned e;
    strobes++;
    e = exp_ts.size() ? exp_ts.pop_front() : 0;
    chk(pps_ts == e, $sformatf("pps_ts %0d expected %0d", pps_ts, e));
    chk(pps_period == (have_prev ? e - prev_ts : 0),
        $sformatf("pps_period %0d expected %0d", pps_period, have_prev ? e - prev_ts : 0));
    prev_ts = e; have_prev = 1;
  end

  initial begin
    repeat (4) @(posedge clk);
    rst = 0;
    repeat (10) @(posedge clk);
    for (int i = 0; i < 12; i++) begin
      @(negedge clk_hs);
      pps = 1;
      exp_ts.push_back(cnt + 2);
      repeat (200) @(posedge clk_hs);
      @(negedge clk_hs) pps = 0;
      repeat (2000 + $urandom_range(0, 500)) @(posedge clk_hs);
    end
    repeat (50) @(posedge clk);
    chk(strobes == 12, $sformatf("%0d pps_new strobes, expected 12", strobes));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
