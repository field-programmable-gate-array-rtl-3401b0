// fedam_pkg: sizes and record types shared by the FEDAM front-end logic.
//
// The number of threshold levels (6), the counter width (64), the PIO word
// width (32) and the DAC word width (16) are the bus widths of the FPGA block
// diagram. The channel count of 3 follows the three-PMT architecture drawing.
// The capture record layout and the PIO word header are this design's own.
package fedam_pkg;
  localparam int unsigned NUM_CH   = 3;   // PMT channels
  localparam int unsigned NUM_THR  = 6;   // threshold levels (one DAC each)
  localparam int unsigned TS_W     = 64;  // high-speed time counter width
  localparam int unsigned PIO_W    = 32;  // parallel I/O word to the microcontroller
  localparam int unsigned DAC_W    = 16;  // DAC command word
  localparam int unsigned EVT_W    = NUM_THR + TS_W;

  // First PIO word of every record carries this tag in its top byte so the
  // firmware can resynchronise on record boundaries.
  localparam logic [7:0] REC_TAG = 8'hA5;

  // One capture record: the comparator state just after a change, and the
  // counter value at which the change was seen.
  typedef struct packed {
    logic [NUM_THR-1:0] level;
    logic [TS_W-1:0]    ts;
  } event_t;
endpackage
