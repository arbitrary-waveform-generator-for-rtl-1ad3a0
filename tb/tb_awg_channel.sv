// tb_awg_channel -- one full-size channel. Loads three branches into the
// memory (one placed across the end of memory so that reading wraps) and
// the branch table, then triggers them in turn and checks every DAC code
// against closed-form values. Also checks: the start latency of a branch
// beginning with a cubic record (first new code 15 cycles after the
// trigger pulse), steps resumed by triggers, a trigger while running being
// ignored, and that a paused branch resumes whatever the branch lines say.
module tb_awg_channel;
  import awg_pkg::*;
  import tb_awg_pkg::*;
  localparam int DEPTH = 7680;
  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        mem_we = 1'b0, br_we = 1'b0;
  logic [12:0] mem_addr = '0, br_addr = '0;
  logic [15:0] mem_data = '0;
  logic [2:0]  br_idx = '0, branch = '0;
  logic        trig = 1'b0;
  logic [15:0] dac;
  logic        idle, paused, running, step_done, branch_done, underrun, trig_ignored;
  int          checks = 0, failures = 0;
  logic [15:0] exp_b [8][$];      // expected codes of each branch
  logic [15:0] exp_dac [$];
  logic        was_running = 1'b0;
  int          n_step = 0, n_branch = 0, n_underrun = 0, n_ignored = 0;

  always #10 clk = ~clk;

  awg_channel dut (.*);

  always @(posedge clk) if (rst_n) begin
    n_step     += int'(step_done);
    n_branch   += int'(branch_done);
    n_underrun += int'(underrun);
    n_ignored  += int'(trig_ignored);
  end

  always @(negedge clk) if (rst_n) begin
    if (was_running) begin
      checks++;
      if (exp_dac.size() == 0 || dac !== exp_dac[0]) begin
        failures++;
        $display("%0t dac %04x expected %04x", $time, dac, (exp_dac.size() != 0) ? exp_dac[0] : 16'h0);
      end
      if (exp_dac.size() != 0) void'(exp_dac.pop_front());
    end
    was_running = running;
  end

  task automatic write_words(int unsigned addr, wq_t w);
    foreach (w[i]) begin
      @(negedge clk);
      mem_we = 1'b1; mem_addr = 13'((addr + i) % DEPTH); mem_data = w[i];
    end
    @(negedge clk); mem_we = 1'b0;
  endtask

  task automatic set_branch(int unsigned idx, int unsigned addr);
    @(negedge clk);
    br_we = 1'b1; br_idx = 3'(idx); br_addr = 13'(addr);
    @(negedge clk); br_we = 1'b0;
  endtask

  // Builds a branch of random segments; step_at marks segments ending a step.
  task automatic build(int unsigned idx, int unsigned addr, int unsigned nseg,
                       int unsigned step_every, bit cubic_first);
    wq_t w;
    for (int i = 0; i < nseg; i++) begin
      mode_e m;
      bit    last, se;
      last = (i == nseg - 1);
      se   = (step_every != 0) && ((i + 1) % step_every == 0) && !last;
      m    = (i == 0 && cubic_first) ? MODE_CUBIC : mode_e'($urandom_range(0, 3));
      if (m == MODE_SAMPLES) begin
        wq_t smp;
        int  n;
        n = $urandom_range(8, 30);
        for (int k = 0; k < n; k++) begin
          smp.push_back(16'($urandom));
          exp_b[idx].push_back(smp[k]);
        end
        w = {w, rec_samples(smp, se, last)};
      end else begin
        seg_t s;
        s = rand_seg(m, $urandom_range(12, 60), se, last);
        w = {w, rec_seg(m, s)};
        for (int k = 0; k < s.dur; k++) exp_b[idx].push_back(poly_at(s, k));
      end
    end
    write_words(addr, w);
    set_branch(idx, addr);
  endtask

  task automatic fire();
    @(negedge clk); trig = 1'b1;
    @(negedge clk); trig = 1'b0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    build(0, 3000,       1, 0, 1'b0);   // short branch
    build(1, 100,        8, 0, 1'b1);   // starts with a cubic record
    build(5, DEPTH - 20, 9, 3, 1'b0);   // three steps, wraps around the end

    // branch 1, with the latency measured
    branch = 3'd1;
    exp_dac = exp_b[1];
    @(negedge clk); trig = 1'b1;
    begin
      int lat;
      lat = 0;
      @(negedge clk); trig = 1'b0;
      lat = 1;
      while (!running) begin @(negedge clk); lat++; end
      // dac takes the first code at the end of this cycle
      checks++;
      if (lat + 1 != 15) begin failures++; $display("start latency %0d cycles", lat + 1); end
    end
    repeat (5) @(posedge clk);
    fire();                                // ignored: running
    wait (idle);
    repeat (2) @(posedge clk);
    checks++;
    if (exp_dac.size() != 0) begin failures++; $display("branch 1: %0d codes missing", exp_dac.size()); end

    // branch 5, three steps; the branch lines change while paused
    branch = 3'd5;
    exp_dac = exp_b[5];
    fire();
    wait (paused);
    branch = 3'd0;
    repeat (10) @(posedge clk);
    fire();
    wait (paused);
    repeat (10) @(posedge clk);
    fire();
    wait (idle);
    repeat (2) @(posedge clk);
    checks++;
    if (exp_dac.size() != 0) begin failures++; $display("branch 5: %0d codes missing", exp_dac.size()); end

    // branch 0
    exp_dac = exp_b[0];
    fire();
    wait (idle);
    repeat (2) @(posedge clk);
    checks++;
    if (exp_dac.size() != 0) begin failures++; $display("branch 0: %0d codes missing", exp_dac.size()); end

    checks++;
    if (n_step != 2 || n_branch != 3 || n_ignored < 1) begin
      failures++; $display("steps %0d ends %0d ignored %0d", n_step, n_branch, n_ignored);
    end
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
