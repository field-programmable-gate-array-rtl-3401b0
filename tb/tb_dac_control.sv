// tb_dac_control: programs random 16-bit words into random DACs and decodes
// the serial lines like a DAC would (sample sdi on each rising sclk edge while
// its chip select is low, latch the word when the chip select rises). Checks
// the word, that only the addressed chip select went low, the number of sclk
// edges, the busy time of 1 + 2*16*SCLK_DIV + 1 cycles, that a write while
// busy is ignored and that an out-of-range DAC number selects nothing.
module tb_dac_control;
  import fedam_pkg::*;
  localparam int DIV = 4;
  logic clk = 0, rst = 1;
  logic wr = 0, busy, sclk, sdi;
  logic [2:0] sel = '0;
  logic [DAC_W-1:0] data = '0;
  logic [NUM_THR-1:0] cs_n;
  int checks = 0, failures = 0;

  always #10 clk = ~clk;

  dac_control #(.SCLK_DIV(DIV)) dut (.clk(clk), .rst(rst), .wr(wr), .sel(sel), .data(data),
    .busy(busy), .sclk(sclk), .sdi(sdi), .cs_n(cs_n));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // DAC models: shift register per chip select
  logic [DAC_W-1:0] shreg [NUM_THR];
  logic [DAC_W-1:0] latched [NUM_THR];
  int nbits [NUM_THR];
  int latch_cnt [NUM_THR];
  for (genvar k = 0; k < NUM_THR; k++) begin : g_dac
    initial begin nbits[k] = 0; latch_cnt[k] = 0; shreg[k] = '0; latched[k] = '0; end
    always @(posedge sclk) if (!cs_n[k]) begin shreg[k] = {shreg[k][DAC_W-2:0], sdi}; nbits[k]++; end
    always @(posedge cs_n[k]) if (!rst) begin latched[k] = shreg[k]; latch_cnt[k]++; end
  end

  int busy_cycles;
  always @(posedge clk) if (busy) busy_cycles++;

  task automatic dac_write(input int s, input logic [DAC_W-1:0] v);
    int lc[NUM_THR], nb[NUM_THR];
    foreach (lc[k]) begin lc[k] = latch_cnt[k]; nb[k] = nbits[k]; end
    busy_cycles = 0;
    @(negedge clk); sel = 3'(s); data = v; wr = 1;
    @(negedge clk); wr = 0;
    // a second request while busy must be ignored
    @(negedge clk); chk(busy, "busy after wr");
    sel = 3'((s + 1) % NUM_THR); data = ~v; wr = 1;
    @(negedge clk); wr = 0;
    wait (!busy);
    repeat (3) @(posedge clk);
    chk(busy_cycles == 2 + 2*DAC_W*DIV, $sformatf("busy for %0d cycles", busy_cycles));
    for (int k = 0; k < NUM_THR; k++) begin
      if (k == s) begin
        chk(latch_cnt[k] == lc[k] + 1, $sformatf("DAC %0d not written", k));
        chk(nbits[k] - nb[k] == DAC_W, $sformatf("DAC %0d got %0d bits", k, nbits[k] - nb[k]));
        chk(latched[k] == v, $sformatf("DAC %0d got %h expected %h", k, latched[k], v));
      end else begin
        chk(latch_cnt[k] == lc[k], $sformatf("DAC %0d written by mistake", k));
      end
    end
  endtask

  initial begin
    int lc_all;
    repeat (3) @(posedge clk);
    rst = 0;
    repeat (2) @(posedge clk);
    chk(cs_n == '1 && !busy, "idle after reset");
    for (int i = 0; i < 30; i++) dac_write(i % NUM_THR, DAC_W'($urandom));
    // out-of-range DAC number: no chip select moves
    lc_all = 0; foreach (latch_cnt[k]) lc_all += latch_cnt[k];
    @(negedge clk); sel = 3'd7; data = 16'h1234; wr = 1;
    @(negedge clk); wr = 0;
    wait (!busy);
    repeat (3) @(posedge clk);
    foreach (latch_cnt[k]) lc_all -= latch_cnt[k];
    chk(lc_all == 0, "DAC number 7 selected a DAC");
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
