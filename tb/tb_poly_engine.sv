// tb_poly_engine -- offers random segments of all kinds to the engine and
// checks every DAC code against the closed-form polynomial value of
// tb_awg_pkg::poly_at. Covers: back-to-back segments with no gap, step
// pauses (output must hold, trigger resumes), branch end (back to idle),
// late segments (underrun: output holds, sequence continues), triggers
// while running (ignored), and the one-segment latency (a go with a
// segment waiting gives the first code two cycles later).
module tb_poly_engine;
  import awg_pkg::*;
  import tb_awg_pkg::*;
  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        go = 1'b0;
  logic        seg_valid, seg_ready;
  seg_t        seg;
  logic [15:0] dac;
  logic        idle, paused, running, step_done, branch_done, underrun, go_ignored;
  int          checks = 0, failures = 0;
  seg_t        segs [$];
  logic [15:0] exp_dac [$];
  bit          gaps = 1'b0;
  logic        src_gate = 1'b1;
  logic        was_running = 1'b0;
  logic [15:0] held;
  int          n_step = 0, n_branch = 0, n_underrun = 0, n_ignored = 0;

  always #10 clk = ~clk;

  assign seg_valid = (segs.size() != 0) && src_gate;
  assign seg       = (segs.size() != 0) ? segs[0] : '0;

  poly_engine dut (.*);

  always @(posedge clk) begin
    if (rst_n && seg_valid && seg_ready) void'(segs.pop_front());
    if (rst_n) begin
      n_step     += int'(step_done);
      n_branch   += int'(branch_done);
      n_underrun += int'(underrun);
      n_ignored  += int'(go_ignored);
    end
  end

  always @(negedge clk) begin
    if (rst_n) begin
      checks++;
      if (was_running) begin
        if (exp_dac.size() == 0 || dac !== exp_dac[0]) begin
          failures++;
          $display("dac %04x expected %04x", dac, (exp_dac.size() != 0) ? exp_dac[0] : 16'hxxxx);
        end
        if (exp_dac.size() != 0) void'(exp_dac.pop_front());
        held = dac;
      end else if (dac !== held) begin
        failures++; $display("dac changed while not running");
      end
      was_running = running;
    end
    src_gate = gaps ? ($urandom_range(0, 5) == 0) : 1'b1;
  end

  task automatic add_seg(bit step_end, bit branch_end, int unsigned maxdur);
    seg_t s;
    s = rand_seg(mode_e'($urandom_range(0, 3)), $urandom_range(1, maxdur), step_end, branch_end);
    segs.push_back(s);
    for (int k = 0; k < s.dur; k++) exp_dac.push_back(poly_at(s, k));
  endtask

  task automatic pulse_go();
    @(negedge clk); go = 1'b1;
    @(negedge clk); go = 1'b0;
  endtask

  initial begin
    held = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // 1. a branch of back-to-back segments: no gaps, no underrun
    for (int i = 0; i < 20; i++) add_seg(1'b0, i == 19, 60);
    pulse_go();
    wait (idle);
    repeat (3) @(posedge clk);
    checks++;
    if (n_underrun != 0 || n_branch != 1 || exp_dac.size() != 0) begin
      failures++; $display("branch run: underruns %0d, ends %0d, left %0d", n_underrun, n_branch, exp_dac.size());
    end

    // 2. steps: three steps, each resumed by a trigger; a trigger while running is ignored
    for (int st = 0; st < 3; st++)
      for (int i = 0; i < 4; i++) add_seg(i == 3, (st == 2) && (i == 3), 30);
    pulse_go();
    repeat (10) @(posedge clk);
    pulse_go();                       // while running: ignored
    for (int st = 0; st < 2; st++) begin
      wait (paused);
      repeat (25) @(posedge clk);     // output must hold meanwhile (checked above)
      pulse_go();
    end
    wait (idle);
    repeat (3) @(posedge clk);
    checks++;
    if (n_step != 2 || n_branch != 2 || n_ignored < 1 || exp_dac.size() != 0) begin
      failures++; $display("steps: %0d steps, %0d ends, %0d ignored, left %0d", n_step, n_branch, n_ignored, exp_dac.size());
    end

    // 3. late segments: underruns, values still in order
    gaps = 1'b1;
    for (int i = 0; i < 30; i++) add_seg(1'b0, i == 29, 3);
    pulse_go();
    wait (idle);
    repeat (3) @(posedge clk);
    gaps = 1'b0;
    checks++;
    if (n_underrun == 0 || exp_dac.size() != 0) begin
      failures++; $display("late segments: %0d underruns, left %0d", n_underrun, exp_dac.size());
    end

    // 4. latency: segment waiting, go -> first new code two cycles later
    add_seg(1'b0, 1'b1, 5);
    @(negedge clk); go = 1'b1;            // cycle c0: IDLE -> ARMED
    @(negedge clk); go = 1'b0;            // c1: load
    checks++;
    if (running) begin failures++; $display("running too early"); end
    @(negedge clk);                       // c2: running, dac loaded at its end
    checks++;
    if (!running) begin failures++; $display("not running one cycle after load"); end
    wait (idle);
    repeat (3) @(posedge clk);

    $display("mechanisms: steps=%0d branch_ends=%0d underruns=%0d ignored=%0d",
             n_step, n_branch, n_underrun, n_ignored);
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
