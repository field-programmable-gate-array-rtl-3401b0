// pio_feeder: hands capture records to the microcontroller, 32 bits at a time.
//
// The microcontroller reads each channel through a 32-bit parallel I/O port.
// A 70-bit record does not fit, so the feeder pops one record from the
// channel FIFO into a holding register and presents it as three words:
//   word 0: {8'hA5 tag, zeros, comparator state[NTHR-1:0]}
//   word 1: timestamp[63:32]
//   word 2: timestamp[31:0]
// pio_valid is high while pio_data holds a word; pio_last marks word 2. The
// microcontroller takes a word by pulsing pio_ack for one clk cycle while
// pio_valid is high; the next word appears in the following cycle. After
// word 2 the next record is popped at once if the FIFO holds one.
// The 32-bit port width follows the source architecture; the word order, tag
// and valid/ack handshake are this design's own.
//
// Timing: runs on the 50 MHz clock. From a non-empty FIFO, word 0 is valid one
// cycle after the pop; each acknowledged word is replaced on the next edge.
module pio_feeder
  import fedam_pkg::*;
#(
  parameter int unsigned NTHR = NUM_THR
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  fifo_empty,
  input  logic [NTHR+TS_W-1:0]  fifo_data,
  output logic                  fifo_rd,
  input  logic                  flush,
  output logic [PIO_W-1:0]      pio_data,
  output logic                  pio_valid,
  output logic                  pio_last,
  input  logic                  pio_ack
);
  logic [NTHR-1:0] lvl_q;
  logic [TS_W-1:0] ts_q;
  logic [1:0]      idx;
  logic            take;  // pop a record this cycle

  assign take    = !flush && !fifo_empty && (!pio_valid || (pio_ack && pio_last));
  assign fifo_rd = take;

  always_ff @(posedge clk) begin
    if (rst) begin
      pio_valid <= 1'b0;
      idx       <= '0;
      lvl_q     <= '0;
      ts_q      <= '0;
    end else if (flush) begin
      pio_valid <= 1'b0;
      idx       <= '0;
    end else if (take) begin
      pio_valid <= 1'b1;
      idx       <= '0;
      lvl_q     <= fifo_data[NTHR+TS_W-1 -: NTHR];
      ts_q      <= fifo_data[TS_W-1:0];
    end else if (pio_valid && pio_ack) begin
      if (pio_last) pio_valid <= 1'b0;
      else          idx       <= idx + 1'b1;
    end
  end

  assign pio_last = (idx == 2'd2);

  always_comb begin
    unique case (idx)
      2'd0:    pio_data = {REC_TAG, {(PIO_W-8-NTHR){1'b0}}, lvl_q};
      2'd1:    pio_data = ts_q[63:32];
      default: pio_data = ts_q[31:0];
    endcase
  end

  // The word on offer does not change until it is acknowledged.
  a_hold: assert property (@(posedge clk) disable iff (rst)
                           pio_valid && !pio_ack && !flush |=> pio_valid && $stable(pio_data));
endmodule
