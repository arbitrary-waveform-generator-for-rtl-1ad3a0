// awg_pkg -- constants and types shared by the waveform-generator RTL.
//
// The generator plays 16-bit samples to three DACs at one sample per
// 50 MHz clock. Waveforms live in a per-channel memory of 16-bit words as
// a sequence of records; each record is one of four kinds (a list of raw
// samples, a value held for a duration, a quadratic or a cubic polynomial
// segment). The record layout, the header bit positions, the fixed-point
// format of the polynomial terms and the host command byte codes are this
// design's own choices; the channel count, sample width, branch count,
// clock rate and total memory size follow the published instrument.
//
// Record layout (one 16-bit word per line, most significant word first):
//   header   : [15:14] mode, [13] step_end, [12] branch_end, [11:0] zero
//   SAMPLES  : header, N, s0 .. s(N-1)            (N = 0 is read as 1)
//   HOLD     : header, D, v0                        (3 words)
//   QUAD     : header, D, v0, d1 (3 words), d2 (3 words)          (9 words)
//   CUBIC    : header, D, v0, d1 (3 words), d2 (3), d3 (3)        (12 words)
// D is the segment length in clock cycles (0 is read as 1). v0 is the
// first output sample. d1..d3 are signed 48-bit forward differences in
// 16.32 fixed point: each cycle v += d1, d1 += d2, d2 += d3.
package awg_pkg;

  localparam int unsigned N_CH       = 3;      // DAC channels per board
  localparam int unsigned SAMPLE_W   = 16;     // DAC code width
  localparam int unsigned WORD_W     = 16;     // waveform memory word width
  localparam int unsigned MEM_DEPTH  = 7680;   // words per channel: 3 x 7680 x 16 bit = 360 kbit
  localparam int unsigned ADDR_W     = 13;     // enough for MEM_DEPTH
  localparam int unsigned N_BRANCH   = 8;      // branches, chosen by three TTL lines
  localparam int unsigned BRANCH_W   = 3;
  localparam int unsigned FRAC_W     = 32;     // fraction bits of the polynomial accumulators
  localparam int unsigned ACC_W      = SAMPLE_W + FRAC_W;  // 48
  localparam int unsigned DUR_W      = 16;     // segment length field
  localparam int unsigned BOARD_W    = 2;      // master = 0, slaves = 1, 2
  localparam int unsigned CH_W       = 2;

  // Record kinds (header bits [15:14]); the four host modes of the instrument.
  typedef enum logic [1:0] {
    MODE_SAMPLES = 2'd0,   // one potential per clock cycle
    MODE_HOLD    = 2'd1,   // one potential held for a duration
    MODE_QUAD    = 2'd2,   // quadratic polynomial over a duration
    MODE_CUBIC   = 2'd3    // cubic polynomial over a duration
  } mode_e;

  localparam int unsigned HDR_STEP_END_BIT   = 13;
  localparam int unsigned HDR_BRANCH_END_BIT = 12;

  // Record lengths in words (SAMPLES: 2 + N).
  localparam int unsigned REC_WORDS_HOLD  = 3;
  localparam int unsigned REC_WORDS_QUAD  = 9;
  localparam int unsigned REC_WORDS_CUBIC = 12;

  // One playable segment, as handed from the record loader to the engine.
  typedef struct packed {
    logic signed [ACC_W-1:0] v0;     // first value, 16.32
    logic signed [ACC_W-1:0] d1;     // first forward difference
    logic signed [ACC_W-1:0] d2;     // second forward difference
    logic signed [ACC_W-1:0] d3;     // third forward difference
    logic        [DUR_W-1:0] dur;    // length in cycles, at least 1
    logic                    step_end;    // pause for a trigger after it
    logic                    branch_end;  // branch finished after it
  } seg_t;

  // Host command byte: [7:6] board, [5:4] channel, [3:0] opcode.
  typedef enum logic [3:0] {
    CMD_WR_MEM    = 4'h1,  // addr_hi addr_lo n_hi n_lo, then n words (hi, lo)
    CMD_WR_BRANCH = 4'h2   // index, addr_hi addr_lo
  } cmd_e;

  // Write request to a channel's waveform memory.
  typedef struct packed {
    logic [BOARD_W-1:0] board;
    logic [CH_W-1:0]    ch;
    logic [ADDR_W-1:0]  addr;
    logic [WORD_W-1:0]  data;
  } mem_wr_t;

  // Write request to a channel's branch table.
  typedef struct packed {
    logic [BOARD_W-1:0]  board;
    logic [CH_W-1:0]     ch;
    logic [BRANCH_W-1:0] idx;
    logic [ADDR_W-1:0]   addr;
  } br_wr_t;

  // Signals the master drives to its slaves over the board-to-board connector.
  typedef struct packed {
    logic                byte_valid;  // host byte from the USB FIFO
    logic [7:0]          byte_data;
    logic                trig;        // synchronised trigger, one-cycle pulse
    logic [BRANCH_W-1:0] branch;      // synchronised branch select
  } link_t;

endpackage
