// poly_engine -- plays segments to the DAC at one sample per clock.
//
// Each segment (seg_t) is a polynomial of degree up to three evaluated
// with forward differences: the output is the integer part of a 16.32
// accumulator v, and every clock v += d1, d1 += d2, d2 += d3. Raw samples
// and held values are segments with all differences zero. Evaluating by
// repeated addition needs no multiplier and gives exactly the polynomial
// the host encoded, cycle after cycle. The output code is two's
// complement (0 = mid-scale) and is truncated, not rounded; overflow
// wraps and is the host's responsibility.
//
// Control: the engine is IDLE (no branch running), ARMED (started, waiting
// for its first segment), RUN, or PAUSED (a step ended, waiting for the
// next trigger). A go pulse in IDLE arms it (the channel restarts the
// fetch of the selected branch on the same cycle, so any segment offered
// then is stale and is not taken); a go pulse in PAUSED resumes with the
// next segment; a go pulse while ARMED or running is ignored and counted on
// go_ignored. When a segment ends and the next is already offered, it is
// loaded on the same clock, so consecutive segments play without a gap;
// if it is not yet there, the output holds its last value (underrun
// pulse) until it arrives. A segment marked step_end pauses after its last
// sample; one marked branch_end returns to IDLE. The output holds its last
// value whenever the engine is not running.
//
// Timing: a segment loaded on cycle t drives dac on cycles t+1 .. t+dur.
//
// The four waveform kinds and the hold-until-trigger steps follow the
// published instrument; the forward-difference evaluation, the number
// format and the underrun behaviour are this design's own.
module poly_engine
  import awg_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                go,           // trigger pulse
  input  logic                seg_valid,
  input  seg_t                seg,
  output logic                seg_ready,
  output logic [SAMPLE_W-1:0] dac,          // DAC code, two's complement
  output logic                idle,         // no branch running
  output logic                paused,       // waiting for a trigger between steps
  output logic                running,
  output logic                step_done,    // pulse: a step_end segment finished
  output logic                branch_done,  // pulse: a branch_end segment finished
  output logic                underrun,     // pulse: next segment was late
  output logic                go_ignored    // pulse: trigger while busy
);

  typedef enum logic [1:0] {S_IDLE, S_ARMED, S_RUN, S_PAUSED} state_e;

  state_e                  state;
  logic signed [ACC_W-1:0] v, d1, d2, d3;
  logic [DUR_W-1:0]        left;
  logic                    cur_step_end, cur_branch_end;
  logic                    last;     // final cycle of the running segment
  logic                    load;

  assign last = (state == S_RUN) && (left == DUR_W'(1));

  always_comb begin
    unique case (state)
      S_ARMED:  load = seg_valid;
      S_RUN:    load = last && !cur_step_end && !cur_branch_end && seg_valid;
      S_PAUSED: load = go && seg_valid;
      default:  load = 1'b0;
    endcase
  end

  assign seg_ready = load;
  assign idle      = (state == S_IDLE);
  assign paused    = (state == S_PAUSED);
  assign running   = (state == S_RUN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      v              <= '0;
      d1             <= '0;
      d2             <= '0;
      d3             <= '0;
      left           <= '0;
      cur_step_end   <= 1'b0;
      cur_branch_end <= 1'b0;
      dac            <= '0;
      step_done      <= 1'b0;
      branch_done    <= 1'b0;
      underrun       <= 1'b0;
      go_ignored     <= 1'b0;
    end else begin
      step_done   <= 1'b0;
      branch_done <= 1'b0;
      underrun    <= 1'b0;
      go_ignored  <= go && (state == S_ARMED || state == S_RUN);

      if (state == S_RUN) begin
        dac  <= v[ACC_W-1 -: SAMPLE_W];
        v    <= v + d1;
        d1   <= d1 + d2;
        d2   <= d2 + d3;
        left <= left - DUR_W'(1);
      end

      if (load) begin
        v              <= seg.v0;
        d1             <= seg.d1;
        d2             <= seg.d2;
        d3             <= seg.d3;
        left           <= seg.dur;
        cur_step_end   <= seg.step_end;
        cur_branch_end <= seg.branch_end;
        state          <= S_RUN;
      end else begin
        unique case (state)
          S_IDLE:   if (go) state <= S_ARMED;
          S_PAUSED: if (go) state <= S_ARMED;
          S_RUN: begin
            if (last) begin
              if (cur_branch_end) begin
                state       <= S_IDLE;
                branch_done <= 1'b1;
              end else if (cur_step_end) begin
                state     <= S_PAUSED;
                step_done <= 1'b1;
              end else begin
                state    <= S_ARMED;
                underrun <= 1'b1;
              end
            end
          end
          default: ;
        endcase
      end
    end
  end

  // A segment is only ever taken when the engine is ready for it.
  assert property (@(posedge clk) disable iff (!rst_n)
                   load |-> (state != S_IDLE));

endmodule
