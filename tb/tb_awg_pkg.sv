// tb_awg_pkg -- helpers shared by the waveform-generator testbenches.
//
// Builds waveform records in the memory layout of awg_pkg and computes the
// samples a segment must produce, independently of the RTL: where the RTL
// adds forward differences cycle by cycle, poly_at() evaluates the closed
// form  v(k) = v0 + k*d1 + C(k,2)*d2 + C(k,3)*d3  in 128-bit arithmetic and
// keeps the bits the DAC receives (integer part of the 16.32 value, modulo
// 2^16, as the hardware wraps). It also builds host command byte streams.
package tb_awg_pkg;
  import awg_pkg::*;

  typedef logic [15:0] wq_t [$];
  typedef logic [7:0]  bq_t [$];

  function automatic logic [15:0] hdr(mode_e m, bit step_end, bit branch_end);
    return {m, step_end, branch_end, 12'h000};
  endfunction

  // Record for a HOLD, QUAD or CUBIC segment.
  function automatic wq_t rec_seg(mode_e m, seg_t s);
    wq_t q;
    q.push_back(hdr(m, s.step_end, s.branch_end));
    q.push_back(s.dur);
    q.push_back(s.v0[47:32]);
    if (m == MODE_QUAD || m == MODE_CUBIC) begin
      q.push_back(s.d1[47:32]); q.push_back(s.d1[31:16]); q.push_back(s.d1[15:0]);
      q.push_back(s.d2[47:32]); q.push_back(s.d2[31:16]); q.push_back(s.d2[15:0]);
    end
    if (m == MODE_CUBIC) begin
      q.push_back(s.d3[47:32]); q.push_back(s.d3[31:16]); q.push_back(s.d3[15:0]);
    end
    return q;
  endfunction

  // Record for a list of raw samples.
  function automatic wq_t rec_samples(wq_t samples, bit step_end, bit branch_end);
    wq_t q;
    q.push_back(hdr(MODE_SAMPLES, step_end, branch_end));
    q.push_back(16'(samples.size()));
    foreach (samples[i]) q.push_back(samples[i]);
    return q;
  endfunction

  // A random segment of the given kind. Only the fields the kind encodes are
  // set; the value's fraction is zero because records carry v0 as an integer.
  function automatic seg_t rand_seg(mode_e m, int unsigned dur, bit step_end, bit branch_end);
    seg_t s;
    s = '0;
    s.v0 = {16'($urandom), 32'h0};
    if (m == MODE_QUAD || m == MODE_CUBIC) begin
      s.d1 = {16'($urandom_range(0, 255) - 128), 32'($urandom)};
      s.d2 = {{8{1'b0}}, 8'($urandom), 32'($urandom)};
      s.d2 = s.d2 - 48'h0000_8000_0000_00 / 2;
      s.d2 = $signed(s.d2) >>> 12;
    end
    if (m == MODE_CUBIC) begin
      s.d3 = {16'h0, 32'($urandom)};
      s.d3 = $signed(s.d3 - 48'h0000_8000_0000) >>> 10;
    end
    s.dur        = 16'(dur);
    s.step_end   = step_end;
    s.branch_end = branch_end;
    return s;
  endfunction

  function automatic logic [15:0] poly_at(seg_t s, int unsigned k);
    logic signed [127:0] v, n, a0, a1, a2, a3;
    n  = 128'(k);
    a0 = 128'($signed(s.v0));
    a1 = 128'($signed(s.d1));
    a2 = 128'($signed(s.d2));
    a3 = 128'($signed(s.d3));
    v  = a0 + n * a1 + ((n * (n - 1)) / 2) * a2 + ((n * (n - 1) * (n - 2)) / 6) * a3;
    return v[47:32];
  endfunction


  // A branch of nseg random records (kind random unless `kind` is 0..3).
  // Every step_every-th record ends a step; the last ends the branch if
  // `ends` is set.
  // Returns the memory words and the DAC codes the branch must produce.
  function automatic void rand_branch(output wq_t w, output wq_t codes,
                                      input int unsigned nseg, input int unsigned step_every,
                                      input int kind, input bit ends = 1'b1);
    w = {};
    codes = {};
    for (int i = 0; i < nseg; i++) begin
      mode_e m;
      bit    last, se;
      last = (i == nseg - 1) && ends;
      se   = (step_every != 0) && ((i + 1) % step_every == 0) && (i != nseg - 1);
      m    = (kind >= 0) ? mode_e'(kind) : mode_e'($urandom_range(0, 3));
      if (m == MODE_SAMPLES) begin
        wq_t smp;
        int  n;
        n = $urandom_range(8, 30);
        for (int k = 0; k < n; k++) begin
          smp.push_back(16'($urandom));
          codes.push_back(smp[k]);
        end
        w = {w, rec_samples(smp, se, last)};
      end else begin
        seg_t s;
        s = rand_seg(m, $urandom_range(12, 60), se, last);
        w = {w, rec_seg(m, s)};
        for (int k = 0; k < s.dur; k++) codes.push_back(poly_at(s, k));
      end
    end
  endfunction

  // Host command bytes.
  function automatic bq_t cmd_wr_mem(int unsigned board, int unsigned ch, int unsigned addr, wq_t words);
    bq_t b;
    b.push_back({2'(board), 2'(ch), CMD_WR_MEM});
    b.push_back(8'(addr >> 8)); b.push_back(8'(addr));
    b.push_back(8'(words.size() >> 8)); b.push_back(8'(words.size()));
    foreach (words[i]) begin
      b.push_back(words[i][15:8]);
      b.push_back(words[i][7:0]);
    end
    return b;
  endfunction

  function automatic bq_t cmd_wr_branch(int unsigned board, int unsigned ch, int unsigned idx, int unsigned addr);
    bq_t b;
    b.push_back({2'(board), 2'(ch), CMD_WR_BRANCH});
    b.push_back(8'(idx));
    b.push_back(8'(addr >> 8)); b.push_back(8'(addr));
    return b;
  endfunction

endpackage
