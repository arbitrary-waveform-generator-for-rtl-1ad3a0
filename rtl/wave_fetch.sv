// wave_fetch -- streams one channel's waveform memory into a word FIFO.
//
// Playback consumes memory words at up to one per clock (raw samples need
// exactly that). This unit keeps a small FIFO of upcoming words full by
// reading the memory at consecutive addresses, one read per cycle while
// there is room, so that once a waveform runs the memory is read
// continuously and playback never waits on it.
//
// A start pulse empties the FIFO, drops the read in flight and reads
// start_addr on the same cycle, so the first word of a branch is offered
// on word_valid/word_data on the cycle after the start pulse, one cycle
// after the memory read. A word returning from the memory while the FIFO
// is empty is offered straight away (fall-through) and only stored if the
// consumer does not take it. Reading wraps from DEPTH-1 to 0. The
// consumer takes a word with word_ready (valid/ready handshake).
//
// Room is counted conservatively (stored words plus the read in flight
// must stay below FIFO_DEPTH), which still sustains one word per cycle.
// The prefetch FIFO, its depth and the fall-through path are this
// design's choice; they keep the start delay close to the time it takes
// to read the first record, as the published instrument describes.
module wave_fetch #(
  parameter int unsigned DEPTH      = 7680,
  parameter int unsigned WIDTH      = 16,
  parameter int unsigned FIFO_DEPTH = 16,
  parameter int unsigned AW         = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [AW-1:0]    start_addr,
  // memory read port
  output logic             ram_re,
  output logic [AW-1:0]    ram_raddr,
  input  logic [WIDTH-1:0] ram_rdata,
  // word stream
  output logic             word_valid,
  output logic [WIDTH-1:0] word_data,
  input  logic             word_ready
);

  localparam int unsigned PW = $clog2(FIFO_DEPTH);
  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1);

  logic [WIDTH-1:0] fifo [FIFO_DEPTH];
  logic [PW-1:0]    wr_ptr, rd_ptr;
  logic [CW-1:0]    count;
  logic [AW-1:0]    addr;
  logic             rd_pend;   // a read issued last cycle returns now
  logic             pop;
  logic             empty;
  logic             push;      // the returning word is stored
  logic             fifo_pop;  // a stored word is taken
  logic [AW-1:0]    next_addr;

  assign empty      = (count == '0);
  assign word_valid = !empty || rd_pend;
  assign word_data  = empty ? ram_rdata : fifo[rd_ptr];
  assign pop        = word_valid && word_ready;
  assign push       = rd_pend && !(empty && pop);
  assign fifo_pop   = pop && !empty;
  assign ram_re     = start || ((CW+1)'(count) + (CW+1)'(rd_pend) < (CW+1)'(FIFO_DEPTH));
  assign ram_raddr  = start ? start_addr : addr;
  assign next_addr  = (ram_raddr == AW'(DEPTH - 1)) ? '0 : ram_raddr + 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr  <= '0;
      rd_ptr  <= '0;
      count   <= '0;
      addr    <= '0;
      rd_pend <= 1'b0;
    end else if (start) begin
      wr_ptr  <= '0;
      rd_ptr  <= '0;
      count   <= '0;
      addr    <= next_addr;
      rd_pend <= 1'b1;
    end else begin
      rd_pend <= ram_re;
      if (ram_re)   addr   <= next_addr;
      if (push)     wr_ptr <= (wr_ptr == PW'(FIFO_DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (fifo_pop) rd_ptr <= (rd_ptr == PW'(FIFO_DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + CW'(push) - CW'(fifo_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (!start && push) fifo[wr_ptr] <= ram_rdata;
  end

  // The FIFO never overflows.
  assert property (@(posedge clk) disable iff (!rst_n) (count <= CW'(FIFO_DEPTH)));

endmodule
