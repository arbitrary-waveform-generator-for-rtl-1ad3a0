// seg_loader -- decodes waveform records into playable segments.
//
// The channel memory holds a sequence of records (layout in awg_pkg): raw
// samples, a held value, a quadratic or a cubic polynomial segment. This
// unit takes the record words one per cycle from the fetch FIFO, gathers
// the fields of one record and hands a complete segment descriptor (seg_t)
// to the playback engine. A raw-sample record becomes one one-cycle
// segment per sample, so samples can be consumed at one per clock.
//
// Handshakes: words arrive on word_valid/word_ready, segments leave on
// seg_valid/seg_ready; both take a transfer when valid and ready are high
// together. The output is a single register that can be refilled on the
// cycle it is taken. The last word of a record is only consumed when that
// register is free, so the unit never drops data. After passing on a
// segment marked branch_end the loader stops reading until flush, which
// clears it and its output register.
//
// Timing: the first word of a record is consumed on the cycle it is
// offered; a record of n words yields its segment n cycles after its first
// word was offered (12 cycles for a cubic segment).
//
// The four record kinds correspond to the four host modes of the published
// instrument; the record layout and the forward-difference form of the
// polynomial coefficients are this design's own.
module seg_loader
  import awg_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              flush,
  input  logic              word_valid,
  input  logic [WORD_W-1:0] word_data,
  output logic              word_ready,
  output logic              seg_valid,
  output seg_t              seg,
  input  logic              seg_ready
);

  typedef enum logic [2:0] {S_HDR, S_DUR, S_V0, S_D1, S_D2, S_D3, S_SAMP, S_STOP} state_e;

  state_e        state;
  mode_e         mode;
  logic          step_end, branch_end;
  logic [1:0]    part;        // word index within a 48-bit term
  logic [DUR_W-1:0] left;     // samples still to come in a SAMPLES record
  seg_t          work;        // segment being gathered
  logic          out_free;
  logic          last_word;   // this word completes a segment
  logic          take;

  assign out_free = !seg_valid || seg_ready;

  always_comb begin
    unique case (state)
      S_V0:    last_word = (mode == MODE_HOLD);
      S_D2:    last_word = (mode == MODE_QUAD) && (part == 2'd2);
      S_D3:    last_word = (part == 2'd2);
      S_SAMP:  last_word = 1'b1;
      default: last_word = 1'b0;
    endcase
  end

  assign word_ready = (state != S_STOP) && (!last_word || out_free);
  assign take       = word_valid && word_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_HDR;
      mode       <= MODE_SAMPLES;
      step_end   <= 1'b0;
      branch_end <= 1'b0;
      part       <= '0;
      left       <= '0;
      work       <= '0;
      seg_valid  <= 1'b0;
      seg        <= '0;
    end else if (flush) begin
      state     <= S_HDR;
      part      <= '0;
      seg_valid <= 1'b0;
    end else begin
      if (seg_valid && seg_ready) seg_valid <= 1'b0;
      if (take) begin
        unique case (state)
          S_HDR: begin
            mode       <= mode_e'(word_data[15:14]);
            step_end   <= word_data[HDR_STEP_END_BIT];
            branch_end <= word_data[HDR_BRANCH_END_BIT];
            work       <= '0;
            state      <= S_DUR;
          end
          S_DUR: begin
            if (mode == MODE_SAMPLES) begin
              left  <= (word_data == '0) ? DUR_W'(1) : word_data;
              state <= S_SAMP;
            end else begin
              work.dur <= (word_data == '0) ? DUR_W'(1) : word_data;
              state    <= S_V0;
            end
          end
          S_V0: begin
            work.v0 <= {word_data, {FRAC_W{1'b0}}};
            part    <= '0;
            if (mode == MODE_HOLD) begin
              seg_valid <= 1'b1;
              seg       <= '{v0: {word_data, {FRAC_W{1'b0}}}, d1: '0, d2: '0, d3: '0,
                             dur: work.dur, step_end: step_end, branch_end: branch_end};
              state     <= branch_end ? S_STOP : S_HDR;
            end else begin
              state <= S_D1;
            end
          end
          S_D1: begin
            work.d1 <= {work.d1[ACC_W-WORD_W-1:0], word_data};
            part    <= (part == 2'd2) ? 2'd0 : part + 2'd1;
            if (part == 2'd2) state <= S_D2;
          end
          S_D2: begin
            work.d2 <= {work.d2[ACC_W-WORD_W-1:0], word_data};
            part    <= (part == 2'd2) ? 2'd0 : part + 2'd1;
            if (part == 2'd2) begin
              if (mode == MODE_QUAD) begin
                seg_valid <= 1'b1;
                seg       <= '{v0: work.v0, d1: work.d1,
                               d2: {work.d2[ACC_W-WORD_W-1:0], word_data}, d3: '0,
                               dur: work.dur, step_end: step_end, branch_end: branch_end};
                state     <= branch_end ? S_STOP : S_HDR;
              end else begin
                state <= S_D3;
              end
            end
          end
          S_D3: begin
            work.d3 <= {work.d3[ACC_W-WORD_W-1:0], word_data};
            part    <= (part == 2'd2) ? 2'd0 : part + 2'd1;
            if (part == 2'd2) begin
              seg_valid <= 1'b1;
              seg       <= '{v0: work.v0, d1: work.d1, d2: work.d2,
                             d3: {work.d3[ACC_W-WORD_W-1:0], word_data},
                             dur: work.dur, step_end: step_end, branch_end: branch_end};
              state     <= branch_end ? S_STOP : S_HDR;
            end
          end
          S_SAMP: begin
            seg_valid <= 1'b1;
            seg       <= '{v0: {word_data, {FRAC_W{1'b0}}}, d1: '0, d2: '0, d3: '0,
                           dur: DUR_W'(1),
                           step_end: step_end && (left == DUR_W'(1)),
                           branch_end: branch_end && (left == DUR_W'(1))};
            left      <= left - DUR_W'(1);
            if (left == DUR_W'(1)) state <= branch_end ? S_STOP : S_HDR;
          end
          default: state <= S_HDR;
        endcase
      end
    end
  end

  // The output register is never overwritten while it holds an untaken segment.
  assert property (@(posedge clk) disable iff (!rst_n || flush)
                   (take && last_word) |-> out_free);

endmodule
