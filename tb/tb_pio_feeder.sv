// tb_pio_feeder: a first-word-fall-through FIFO model feeds random records to
// the PIO feeder while the tb acknowledges words after random delays. Each
// record must come out as three words in order (tag + comparator state,
// timestamp high, timestamp low), pio_last on the third, with nothing lost,
// repeated or reordered, and back-to-back records without a gap when the
// acknowledges come every cycle. A flush must drop the record on offer.
module tb_pio_feeder;
  import fedam_pkg::*;
  logic clk = 0, rst = 1;
  logic fifo_empty, fifo_rd, pio_valid, pio_last, pio_ack = 0, flush = 0;
  bit ack_en = 1;
  logic [NUM_THR+TS_W-1:0] fifo_data;
  logic [PIO_W-1:0] pio_data;
  int checks = 0, failures = 0;
  logic [NUM_THR+TS_W-1:0] src[$], ref_q[$];
  int ack_gap = 3;
  int words = 0;

  always #10 clk = ~clk;

  assign fifo_empty = (src.size() == 0);
  assign fifo_data  = fifo_empty ? '0 : src[0];
  always @(posedge clk) if (fifo_rd) begin
    if (fifo_empty) chk(0, "pop from empty FIFO");
    else void'(src.pop_front());
  end

  pio_feeder dut (.clk(clk), .rst(rst), .fifo_empty(fifo_empty), .fifo_data(fifo_data), .fifo_rd(fifo_rd), .flush(flush),
    .pio_data(pio_data), .pio_valid(pio_valid), .pio_last(pio_last), .pio_ack(pio_ack));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // microcontroller: take words, rebuild records, compare
  logic [NUM_THR+TS_W-1:0] cur;
  int widx = 0;
  always @(negedge clk) pio_ack <= ack_en && pio_valid && ($urandom_range(0, ack_gap) == 0);
  always @(posedge clk) if (!rst && pio_valid && pio_ack) begin
    logic [NUM_THR+TS_W-1:0] e;
    words++;
    e = ref_q.size() ? ref_q[0] : '0;
    case (widx)
      0: chk(pio_data == {REC_TAG, {(PIO_W-8-NUM_THR){1'b0}}, e[NUM_THR+TS_W-1 -: NUM_THR]},
             $sformatf("word0 %h", pio_data));
      1: chk(pio_data == e[63:32], $sformatf("word1 %h expected %h", pio_data, e[63:32]));
      default: chk(pio_data == e[31:0], $sformatf("word2 %h expected %h", pio_data, e[31:0]));
    endcase
    chk(pio_last == (widx == 2), "pio_last position");
    if (widx == 2) begin void'(ref_q.pop_front()); widx = 0; end
    else widx++;
  end

  task automatic add(input int n);
    logic [NUM_THR+TS_W-1:0] r;
    for (int i = 0; i < n; i++) begin
      r = {6'($urandom), $urandom, $urandom};
      src.push_back(r); ref_q.push_back(r);
    end
  endtask

  initial begin
    int t0;
    repeat (3) @(posedge clk);
    rst = 0;
    repeat (3) @(posedge clk);
    chk(!pio_valid, "nothing offered when FIFO empty");
    for (int i = 0; i < 50; i++) begin
      @(negedge clk); add($urandom_range(1, 4));
      repeat ($urandom_range(0, 20)) @(posedge clk);
    end
    wait (ref_q.size() == 0);
    repeat (3) @(posedge clk);
    chk(!pio_valid && words % 3 == 0, "idle after all records");
    // flush: the held record is dropped, nothing is popped while flush is high
    ack_en = 0;
    @(negedge clk); add(2);
    wait (pio_valid);
    @(negedge clk); flush = 1;
    @(posedge clk); chk(!fifo_rd, "no pop during flush");
    #1 chk(!pio_valid, "held record dropped by flush");
    @(negedge clk); flush = 0;
    void'(ref_q.pop_front());
    ack_en = 1;
    wait (ref_q.size() == 0);
    repeat (3) @(posedge clk);
    // full rate: ack every cycle, 10 records = 30 words in 31 cycles
    ack_gap = 0;
    @(negedge clk); add(10);
    t0 = words;
    repeat (31) @(posedge clk);
    #1 chk(words - t0 == 30 && ref_q.size() == 0,
           $sformatf("full-rate: %0d words in 31 cycles", words - t0));
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
