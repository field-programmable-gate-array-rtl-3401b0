// dac_control: serial interface to the six threshold DACs.
//
// The microcontroller sets a threshold by pulsing `wr` with a DAC number
// (`sel`, 0..NUM_DAC-1) and a 16-bit word (`data`). The controller lowers that
// DAC's chip select, shifts the word out MSB first on sdi with sclk, and
// raises the chip select again. Mode-0 timing: sdi changes while sclk is
// low, the DAC samples it on the rising edge of sclk. sclk runs at
// clk / (2*SCLK_DIV), 6.25 MHz from 50 MHz with the default.
// The existence of a software-programmable serial DAC interface, the six DACs
// and the 16-bit command width follow the source design; the DAC protocol,
// clock rate and handshake are this design's own, since the DAC part is not
// named.
//
// Timing: busy rises the cycle after wr and stays high for
// 1 + 2*DAC_W*SCLK_DIV + 1 cycles (set-up, 16 sclk periods, hold); a `wr`
// while busy is ignored. A `sel` of NUM_DAC or more selects no DAC.
module dac_control
  import fedam_pkg::*;
#(
  parameter int unsigned NUM_DAC  = NUM_THR,
  parameter int unsigned SCLK_DIV = 4
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               wr,
  input  logic [2:0]         sel,
  input  logic [DAC_W-1:0]   data,
  output logic               busy,
  output logic               sclk,
  output logic               sdi,
  output logic [NUM_DAC-1:0] cs_n
);
  typedef enum logic [1:0] {S_IDLE, S_SETUP, S_SHIFT, S_HOLD} state_t;
  state_t state;

  logic [DAC_W-1:0]               sh;
  logic [$clog2(DAC_W+1)-1:0]     bits_left;
  logic [$clog2(SCLK_DIV+1)-1:0]  div;

  assign busy = (state != S_IDLE);
  assign sdi  = sh[DAC_W-1];

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= S_IDLE;
      sh        <= '0;
      bits_left <= '0;
      div       <= '0;
      sclk      <= 1'b0;
      cs_n      <= '1;
    end else begin
      unique case (state)
        S_IDLE: if (wr) begin
          sh        <= data;
          bits_left <= DAC_W[$clog2(DAC_W+1)-1:0];
          div       <= '0;
          cs_n      <= ~(NUM_DAC'(1) << sel);
          state     <= S_SETUP;
        end
        S_SETUP: state <= S_SHIFT;
        S_SHIFT: begin
          if (div == SCLK_DIV[$clog2(SCLK_DIV+1)-1:0] - 1'b1) begin
            div  <= '0;
            sclk <= ~sclk;
            if (sclk) begin                // falling edge: next bit
              sh        <= sh << 1;
              bits_left <= bits_left - 1'b1;
              if (bits_left == 1) state <= S_HOLD;
            end
          end else begin
            div <= div + 1'b1;
          end
        end
        S_HOLD: begin
          cs_n  <= '1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_cs_onehot: assert property (@(posedge clk) disable iff (rst) $onehot0(~cs_n));
endmodule
