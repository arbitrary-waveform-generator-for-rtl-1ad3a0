// wave_ram -- one channel's waveform memory.
//
// A simple dual-port RAM of DEPTH words: the host side writes through
// (we, waddr, wdata); the playback side reads through (re, raddr) and gets
// the word on rdata one clock later. Addresses at or above DEPTH are
// ignored on write and read as the last value on read. It maps onto FPGA
// block RAM.
//
// The published instrument holds 360 kbit of on-chip RAM split between
// three channels; 7680 words of 16 bits per channel is that split. The
// word width and the one-cycle read latency are this design's choice.
module wave_ram #(
  parameter int unsigned DEPTH = 7680,
  parameter int unsigned WIDTH = 16,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && waddr < AW'(DEPTH)) mem[waddr] <= wdata;
    if (re && raddr < AW'(DEPTH)) rdata <= mem[raddr];
  end

endmodule
