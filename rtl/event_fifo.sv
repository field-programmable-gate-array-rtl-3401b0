// event_fifo: dual-clock FIFO carrying capture records from the 500 MHz
// capture domain to the 50 MHz microcontroller domain.
//
// Classic Gray-pointer design: each side keeps a binary pointer one bit wider
// than the address and a Gray copy of it; the Gray copy of the opposite side
// is passed through a two-flop synchroniser. Full is raised when the write
// Gray pointer equals the synchronised read pointer with its two top bits
// inverted; empty when the read Gray pointer equals the synchronised write
// pointer. Both flags are therefore conservative: a slot freed or filled on
// the other side becomes visible two or three clock edges later.
// The source architecture shows a FIFO on the clock-domain boundary of each
// channel; its depth, width and structure are this design's own.
//
// Interface: write side wclk/wrst/wr_en/wr_data/full; read side
// rclk/rrst/rd_en/rd_data/empty. Reads are first-word-fall-through: rd_data
// shows the oldest record while empty is low, and rd_en pops it. The storage
// is an array written in wclk and read asynchronously (distributed RAM).
// Both resets must be applied together.
module event_fifo #(
  parameter int unsigned WIDTH = 70,
  parameter int unsigned DEPTH = 32   // power of two
) (
  input  logic             wclk,
  input  logic             wrst,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  output logic             full,
  input  logic             rclk,
  input  logic             rrst,
  input  logic             rd_en,
  input  logic             rd_flush,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w, wgray_r;          // synchronised opposite pointers
  logic [AW:0] wbin_n, rbin_n;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  function automatic logic [AW:0] gray2bin(input logic [AW:0] g);
    logic [AW:0] b;
    b[AW] = g[AW];
    for (int i = int'(AW) - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // ---- write side ----
  assign full   = (wgray == {~rgray_w[AW:AW-1], rgray_w[AW-2:0]});
  assign wbin_n = wbin + (AW+1)'(wr_en && !full);

  always_ff @(posedge wclk) begin
    if (wr_en && !full) mem[wbin[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge wclk) begin
    if (wrst) begin
      wbin  <= '0;
      wgray <= '0;
    end else begin
      wbin  <= wbin_n;
      wgray <= bin2gray(wbin_n);
    end
  end

  sync_2ff #(.W(AW+1)) u_sync_r2w (.clk(wclk), .rst(wrst), .d(rgray), .q(rgray_w));

  // ---- read side ----
  assign empty   = (rgray == wgray_r);
  assign rbin_n  = rd_flush ? gray2bin(wgray_r) : rbin + (AW+1)'(rd_en && !empty);
  assign rd_data = mem[rbin[AW-1:0]];

  always_ff @(posedge rclk) begin
    if (rrst) begin
      rbin  <= '0;
      rgray <= '0;
    end else begin
      rbin  <= rbin_n;
      rgray <= bin2gray(rbin_n);
    end
  end

  sync_2ff #(.W(AW+1)) u_sync_w2r (.clk(rclk), .rst(rrst), .d(wgray), .q(wgray_r));

  initial begin
    assert (DEPTH >= 4 && (1 << AW) == DEPTH) else $error("event_fifo: DEPTH must be a power of two >= 4");
  end
endmodule
