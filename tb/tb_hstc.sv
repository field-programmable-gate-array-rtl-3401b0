// tb_hstc: checks the high-speed time counter. After reset the counter must
// equal the number of clk_hs edges since reset release, every cycle, for a
// 64-bit instance; a 4-bit instance checks wrap-around. Ends with a
// TB_RESULT line; a watchdog ends a hung run.
module tb_hstc;
  logic clk = 0, rst = 1;
  logic [63:0] count;
  logic [3:0]  count4;
  int checks = 0, failures = 0;
  longint unsigned ref_cnt;

  always #1 clk = ~clk;

  hstc           dut  (.clk_hs(clk), .rst_hs(rst), .count(count));
  hstc #(.TS_W(4)) dut4 (.clk_hs(clk), .rst_hs(rst), .count(count4));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #0.5 rst = 0;
    ref_cnt = 0;
    for (int i = 0; i < 200; i++) begin
      @(posedge clk); #0.5;
      ref_cnt++;
      chk(count == ref_cnt, $sformatf("count %0d expected %0d", count, ref_cnt));
      chk(count4 == 4'(ref_cnt), $sformatf("4-bit count %0d expected %0d", count4, 4'(ref_cnt)));
    end
    rst = 1; @(posedge clk); #0.5;
    chk(count == 0, "reset clears counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
