// awg_channel -- one DAC channel of the waveform generator.
//
// Holds the channel's waveform memory and branch table and plays the
// selected branch to the DAC: wave_ram -> wave_fetch -> seg_loader ->
// poly_engine. The host writes the memory and the table at any time
// through (mem_we, mem_addr, mem_data) and (br_we, br_idx, br_addr).
//
// Triggers: a trig pulse while the channel is idle starts the branch
// chosen by `branch` on that cycle: its start address is looked up, the
// fetch restarts there and the loader is cleared. A trig pulse while the
// channel is paused between steps resumes with the branch's next step,
// whatever `branch` says. A trig pulse while it runs is ignored.
//
// Timing (from the cycle trig is high to the first new DAC code): a
// branch that starts with a record of n words shows its first sample
// n + 3 cycles later (15 for a cubic segment, of which 12 read the
// record). Within a step, records follow without gaps as long as each
// segment lasts at least as many cycles as the next record has words.
//
// The branch and step behaviour follows the published instrument; the
// start latency, the rule that a trigger while running is ignored, and
// the rule that a paused branch resumes regardless of the branch lines are
// this design's own.
module awg_channel
  import awg_pkg::*;
#(
  parameter int unsigned DEPTH = awg_pkg::MEM_DEPTH,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                clk,
  input  logic                rst_n,
  // host writes
  input  logic                mem_we,
  input  logic [AW-1:0]       mem_addr,
  input  logic [WORD_W-1:0]   mem_data,
  input  logic                br_we,
  input  logic [BRANCH_W-1:0] br_idx,
  input  logic [AW-1:0]       br_addr,
  // real-time control
  input  logic                trig,
  input  logic [BRANCH_W-1:0] branch,
  // DAC
  output logic [SAMPLE_W-1:0] dac,
  // status
  output logic                idle,
  output logic                paused,
  output logic                running,
  output logic                step_done,
  output logic                branch_done,
  output logic                underrun,
  output logic                trig_ignored
);

  logic              restart;
  logic [AW-1:0]     start_addr;
  logic              ram_re;
  logic [AW-1:0]     ram_raddr;
  logic [WORD_W-1:0] ram_rdata;
  logic              word_valid, word_ready;
  logic [WORD_W-1:0] word_data;
  logic              seg_valid, seg_ready;
  seg_t              seg;

  assign restart = trig && idle;

  wave_ram #(.DEPTH(DEPTH), .WIDTH(WORD_W), .AW(AW)) u_ram (
    .clk   (clk),
    .we    (mem_we),
    .waddr (mem_addr),
    .wdata (mem_data),
    .re    (ram_re),
    .raddr (ram_raddr),
    .rdata (ram_rdata)
  );

  branch_table #(.N_BRANCH(N_BRANCH), .AW(AW), .IW(BRANCH_W)) u_table (
    .clk   (clk),
    .rst_n (rst_n),
    .we    (br_we),
    .widx  (br_idx),
    .waddr (br_addr),
    .ridx  (branch),
    .raddr (start_addr)
  );

  wave_fetch #(.DEPTH(DEPTH), .WIDTH(WORD_W), .FIFO_DEPTH(16), .AW(AW)) u_fetch (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (restart),
    .start_addr (start_addr),
    .ram_re     (ram_re),
    .ram_raddr  (ram_raddr),
    .ram_rdata  (ram_rdata),
    .word_valid (word_valid),
    .word_data  (word_data),
    .word_ready (word_ready)
  );

  seg_loader u_loader (
    .clk        (clk),
    .rst_n      (rst_n),
    .flush      (restart),
    .word_valid (word_valid),
    .word_data  (word_data),
    .word_ready (word_ready),
    .seg_valid  (seg_valid),
    .seg        (seg),
    .seg_ready  (seg_ready)
  );

  poly_engine u_engine (
    .clk         (clk),
    .rst_n       (rst_n),
    .go          (trig),
    .seg_valid   (seg_valid),
    .seg         (seg),
    .seg_ready   (seg_ready),
    .dac         (dac),
    .idle        (idle),
    .paused      (paused),
    .running     (running),
    .step_done   (step_done),
    .branch_done (branch_done),
    .underrun    (underrun),
    .go_ignored  (trig_ignored)
  );

endmodule
