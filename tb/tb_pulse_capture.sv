// tb_pulse_capture: drives random comparator-state changes into one channel's
// capture logic, with the tb's own cycle counter as the time base, and checks
// that every change yields exactly one record holding the new state and the
// counter value two cycles after the change was applied. Also checks that
// nothing is written while capture is disabled, that a change seen while the
// FIFO is full is dropped and sets the sticky overflow flag, and that
// ovf_clear clears it.
module tb_pulse_capture;
  import fedam_pkg::*;
  logic clk = 0, rst = 1;
  logic [NUM_THR-1:0] cmp = '0;
  logic [TS_W-1:0] cnt = '0;
  logic capture_en = 0, ovf_clear = 0, wr_full = 0;
  logic wr_en, overflow;
  logic [NUM_THR+TS_W-1:0] wr_data;
  int checks = 0, failures = 0;

  typedef struct { logic [NUM_THR-1:0] lvl; logic [TS_W-1:0] ts; } exp_t;
  exp_t q[$];
  int writes = 0;

  always #1 clk = ~clk;
  always_ff @(posedge clk) cnt <= cnt + 1;

  pulse_capture dut (.clk_hs(clk), .rst_hs(rst), .cmp_in(cmp), .count(cnt),
    .capture_en(capture_en), .ovf_clear(ovf_clear), .wr_en(wr_en), .wr_data(wr_data),
    .wr_full(wr_full), .overflow(overflow));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // record monitor
  always @(posedge clk) if (!rst && wr_en) begin
    writes++;
    if (q.size() == 0) chk(0, "unexpected record");
    else begin
      exp_t e;
      e = q.pop_front();
      chk(wr_data[NUM_THR+TS_W-1 -: NUM_THR] == e.lvl,
          $sformatf("level %b expected %b", wr_data[NUM_THR+TS_W-1 -: NUM_THR], e.lvl));
      chk(wr_data[TS_W-1:0] == e.ts,
          $sformatf("ts %0d expected %0d", wr_data[TS_W-1:0], e.ts));
    end
  end

  // apply a new comparator state on the falling edge; `expect_rec` says if a
  // record must follow
  task automatic drive(input logic [NUM_THR-1:0] v, input bit expect_rec);
    @(negedge clk);
    if (expect_rec && v != cmp) q.push_back('{lvl: v, ts: cnt + 2});
    cmp = v;
  endtask

  initial begin
    logic [NUM_THR-1:0] v;
    int w0;
    repeat (4) @(posedge clk);
    @(negedge clk) rst = 0;
    capture_en = 1;
    repeat (4) @(posedge clk);
    // a ramp pulse: thresholds crossed upward one by one, then downward
    for (int k = 0; k < NUM_THR; k++) begin drive(cmp | (1 << k), 1); repeat (k) @(posedge clk); end
    for (int k = NUM_THR-1; k >= 0; k--) begin drive(cmp & ~(1 << k), 1); repeat (2*k) @(posedge clk); end
    // random changes, at least one cycle apart
    for (int i = 0; i < 300; i++) begin
      v = NUM_THR'($urandom);
      drive(v, 1);
      repeat ($urandom_range(0, 3)) @(posedge clk);
    end
    drive('0, 1);
    repeat (5) @(posedge clk);
    chk(q.size() == 0, $sformatf("%0d records missing", q.size()));
    // capture disabled: no records
    capture_en = 0;
    w0 = writes;
    for (int i = 0; i < 20; i++) drive(NUM_THR'(i * 7 + 1), 0);
    drive('0, 0);
    repeat (5) @(posedge clk);
    chk(writes == w0, "records written while capture disabled");
    // FIFO full: record dropped, overflow set and held
    capture_en = 1;
    repeat (2) @(posedge clk);
    chk(overflow == 0, "overflow clear initially");
    @(negedge clk) wr_full = 1;
    drive(6'b000011, 0);
    repeat (4) @(posedge clk);
    #0.1;
    chk(overflow == 1, "overflow set by a dropped record");
    @(negedge clk) wr_full = 0;
    repeat (4) @(posedge clk);
    chk(overflow == 1, "overflow is sticky");
    chk(q.size() == 0 && writes == w0, "dropped record not written later");
    @(negedge clk) ovf_clear = 1;
    @(negedge clk) ovf_clear = 0;
    @(posedge clk); #0.1;
    chk(overflow == 0, "ovf_clear clears overflow");
    drive('0, 1);
    repeat (5) @(posedge clk);
    chk(q.size() == 0, "record after overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
