// tb_event_fifo: checks the dual-clock FIFO with a 2 ns write clock and a
// 20 ns read clock (the 500/50 MHz pair of the design) plus a run with the
// clocks swapped in speed. Random writes and reads are compared against a
// queue; the FIFO must accept exactly DEPTH records before full, keep order
// and data, drop nothing that was accepted, go empty when drained, and go
// empty (and no longer full) after a read-side flush.
module tb_event_fifo;
  localparam int W = 70, D = 32;
  logic wclk = 0, rclk = 0, rst = 1;
  logic wr_en = 0, rd_en = 0, rd_flush = 0, full, empty;
  logic [W-1:0] wr_data = '0, rd_data;
  int checks = 0, failures = 0;
  logic [W-1:0] q[$];
  realtime wper = 1.0, rper = 10.0;
  bit rd_random = 0;

  always #(wper) wclk = ~wclk;
  always #(rper) rclk = ~rclk;

  event_fifo #(.WIDTH(W), .DEPTH(D)) dut (.wclk(wclk), .wrst(rst), .wr_en(wr_en), .wr_data(wr_data), .full(full),
    .rclk(rclk), .rrst(rst), .rd_en(rd_en), .rd_flush(rd_flush), .rd_data(rd_data), .empty(empty));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [W-1:0] rnd();
    return {6'($urandom), $urandom, $urandom};
  endfunction

  // writer: each accepted write goes into the reference queue
  task automatic write_n(input int n, input int gap);
    for (int i = 0; i < n; i++) begin
      @(negedge wclk);
      wr_data = rnd();
      wr_en = 1;
      @(posedge wclk);
      if (!full) q.push_back(wr_data);
      #0.01 wr_en = 0;
      repeat ($urandom_range(0, gap)) @(posedge wclk);
    end
  endtask

  // reader: random or back-to-back pops, checked against the queue
  always @(negedge rclk) begin
    rd_en <= rd_random ? ($urandom_range(0, 3) != 0) : 1'b0;
  end
  always @(posedge rclk) if (!rst && rd_en && !empty) begin
    if (q.size() == 0) chk(0, "read with empty reference");
    else chk(rd_data == q.pop_front(), "data mismatch");
  end

  task automatic run_phase();
    int n;
    // fill until full without reading: exactly D records fit
    rd_random = 0;
    n = 0;
    while (!full) begin
      @(negedge wclk); wr_data = rnd(); wr_en = 1;
      @(posedge wclk); if (!full) begin q.push_back(wr_data); n++; end
      #0.01 wr_en = 0;
    end
    chk(n == D, $sformatf("accepted %0d records before full, expected %0d", n, D));
    // a write while full is ignored
    write_n(3, 0);
    chk(q.size() == D, "write while full was accepted");
    // flush from the read side: everything goes, the writer sees room again
    repeat (4) @(posedge rclk);   // let the last writes become visible
    @(negedge rclk) rd_flush = 1;
    @(negedge rclk) rd_flush = 0;
    q.delete();
    chk(empty, "empty after flush");
    repeat (4) @(posedge wclk);
    repeat (4) @(posedge rclk);
    chk(!full && empty, "not full after flush");
    // random traffic
    rd_random = 1;
    write_n(400, 4);
    // drain
    repeat (400) @(posedge rclk);
    rd_random = 0;
    repeat (4) @(posedge rclk);
    chk(q.size() == 0, $sformatf("%0d records not read", q.size()));
    chk(empty, "empty after drain");
  endtask

  initial begin
    repeat (4) @(posedge rclk);
    rst = 0;
    repeat (4) @(posedge rclk);
    chk(empty && !full, "empty after reset");
    run_phase();
    // swap speeds: slow writer, fast reader
    rst = 1; wper = 7.0; rper = 1.3;
    repeat (4) @(posedge wclk);
    rst = 0;
    repeat (4) @(posedge wclk);
    run_phase();
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
