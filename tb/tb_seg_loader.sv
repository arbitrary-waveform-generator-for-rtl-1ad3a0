// tb_seg_loader -- streams random record sequences (all four kinds, random
// step and branch flags, zero lengths) into the loader with random gaps on
// both handshakes, and compares every segment it emits with the segment
// the records encode. Also checks that the loader stops reading after a
// branch_end record and resumes after flush, and that a cubic record's
// segment appears 12 cycles after its first word when nothing stalls.
module tb_seg_loader;
  import awg_pkg::*;
  import tb_awg_pkg::*;
  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        flush = 1'b0;
  logic        word_valid, word_ready;
  logic [15:0] word_data;
  logic        seg_valid, seg_ready;
  seg_t        seg;
  int          checks = 0, failures = 0;
  wq_t         words;
  seg_t        exp_segs [$];
  bit          gaps = 1'b1;
  logic        src_gate = 1'b1, dst_gate = 1'b1;

  always #10 clk = ~clk;

  assign word_valid = (words.size() != 0) && src_gate;
  assign word_data  = (words.size() != 0) ? words[0] : 16'h0;
  assign seg_ready  = dst_gate;

  always @(negedge clk) begin
    src_gate = gaps ? ($urandom_range(0, 3) != 0) : 1'b1;
    dst_gate = gaps ? ($urandom_range(0, 3) != 0) : 1'b1;
  end

  seg_loader dut (.*);

  always @(posedge clk) begin
    if (rst_n && !flush) begin
      if (word_valid && word_ready) void'(words.pop_front());
      if (seg_valid && seg_ready) begin
        checks++;
        if (exp_segs.size() == 0 || seg !== exp_segs[0]) begin
          failures++;
          $display("segment mismatch: got %p", seg);
          if (exp_segs.size() != 0) $display("            expected %p", exp_segs[0]);
        end
        if (exp_segs.size() != 0) void'(exp_segs.pop_front());
      end
    end
  end

  // Appends one random record to the stream and its segments to the expected list.
  task automatic add_record(bit branch_end);
    mode_e m;
    bit    se;
    seg_t  s;
    m  = mode_e'($urandom_range(0, 3));
    se = ($urandom_range(0, 3) == 0);
    if (m == MODE_SAMPLES) begin
      wq_t smp;
      int  n;
      n = $urandom_range(0, 5);
      for (int i = 0; i < n; i++) smp.push_back(16'($urandom));
      words = {words, rec_samples(smp, se, branch_end)};
      if (n == 0) begin
        // a zero count is read as one sample: the next word
        words.push_back(16'h1234);
        smp.push_back(16'h1234);
        n = 1;
      end
      for (int i = 0; i < n; i++) begin
        s = '0;
        s.v0 = {smp[i], 32'h0};
        s.dur = 16'd1;
        s.step_end   = se && (i == n - 1);
        s.branch_end = branch_end && (i == n - 1);
        exp_segs.push_back(s);
      end
    end else begin
      s = rand_seg(m, $urandom_range(0, 40), se, branch_end);
      words = {words, rec_seg(m, s)};
      if (s.dur == 0) s.dur = 16'd1;
      exp_segs.push_back(s);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int prog = 0; prog < 6; prog++) begin
      int nrec;
      nrec = $urandom_range(3, 25);
      for (int r = 0; r < nrec; r++) add_record(r == nrec - 1);
      // words after the branch end must not be read
      for (int i = 0; i < 5; i++) words.push_back(16'hFFFF);
      wait (exp_segs.size() == 0);
      repeat (20) @(posedge clk);
      checks++;
      if (words.size() != 5) begin failures++; $display("loader read past the branch end"); end
      @(negedge clk);
      flush = 1'b1;
      words = {};
      @(negedge clk);
      flush = 1'b0;
    end
    // latency of a cubic record with no stalls
    gaps = 1'b0;
    begin
      seg_t s;
      int   t0;
      s = rand_seg(MODE_CUBIC, 30, 1'b0, 1'b1);
      @(negedge clk);
      words = rec_seg(MODE_CUBIC, s);
      exp_segs.push_back(s);
      t0 = 0;
      while (!seg_valid) begin @(negedge clk); t0++; end
      checks++;
      if (t0 != 12) begin failures++; $display("cubic record took %0d cycles", t0); end
      wait (exp_segs.size() == 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
