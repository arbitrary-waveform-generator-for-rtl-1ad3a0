// tb_workload_branching -- the separate/recombine workload on one
// full-size channel.
//
// Three branches are loaded once: 0 the static trap potential (a held
// value), 1 a 55 us separation waveform and 2 a recombination waveform
// (each 2750 cycles as 25 cubic segments of 110 cycles). The sequence then
// runs 16 separations and 16 recombinations, each followed by the static
// branch, choosing every branch through the branch lines and a trigger
// with no new upload: 48 branch runs in all. Every DAC code is checked
// against closed-form values and each run's length in cycles is checked.
module tb_workload_branching;
  import awg_pkg::*;
  import tb_awg_pkg::*;
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
  wq_t         exp_dac;
  logic        was_running = 1'b0;
  int          run_len = 0, n_runs = 0, n_underrun = 0;

  always #10 clk = ~clk;

  awg_channel dut (.*);

  always @(posedge clk) if (rst_n) begin
    if (running) run_len++;
    n_underrun += int'(underrun);
  end

  always @(negedge clk) if (rst_n) begin
    if (was_running) begin
      checks++;
      if (exp_dac.size() == 0 || dac !== exp_dac[0]) begin
        failures++;
        if (failures < 10) $display("dac %04x expected %04x", dac, (exp_dac.size() != 0) ? exp_dac[0] : 16'h0);
      end
      if (exp_dac.size() != 0) void'(exp_dac.pop_front());
    end
    was_running = running;
  end

  task automatic write_words(int unsigned addr, wq_t w);
    foreach (w[i]) begin
      @(negedge clk);
      mem_we = 1'b1; mem_addr = 13'(addr + i); mem_data = w[i];
    end
    @(negedge clk); mem_we = 1'b0;
  endtask

  task automatic set_branch(int unsigned idx, int unsigned addr);
    @(negedge clk);
    br_we = 1'b1; br_idx = 3'(idx); br_addr = 13'(addr);
    @(negedge clk); br_we = 1'b0;
  endtask

  initial begin
    wq_t  w [3];
    wq_t  codes [3];
    seg_t s;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    s = '0; s.v0 = {16'h1000, 32'h0}; s.dur = 16'd50; s.branch_end = 1'b1;
    w[0] = rec_seg(MODE_HOLD, s);
    for (int k = 0; k < 50; k++) codes[0].push_back(16'h1000);
    for (int br = 1; br < 3; br++)
      for (int i = 0; i < 25; i++) begin
        s = rand_seg(MODE_CUBIC, 110, 1'b0, i == 24);
        w[br] = {w[br], rec_seg(MODE_CUBIC, s)};
        for (int k = 0; k < 110; k++) codes[br].push_back(poly_at(s, k));
      end
    write_words(0, w[0]);    set_branch(0, 0);
    write_words(10, w[1]);   set_branch(1, 10);
    write_words(400, w[2]);  set_branch(2, 400);

    for (int n = 0; n < 32; n++) begin
      int unsigned seq [2];
      seq = '{(n % 2 == 0) ? 1 : 2, 0};
      foreach (seq[j]) begin
        exp_dac = codes[seq[j]];
        run_len = 0;
        @(negedge clk); branch = 3'(seq[j]);
        repeat (2) @(negedge clk);     // branch lines settle through the synchroniser
        trig = 1'b1;
        @(negedge clk); trig = 1'b0;
        while (idle) @(negedge clk);
        wait (idle);
        repeat (2) @(negedge clk);
        n_runs++;
        checks++;
        if (run_len != codes[seq[j]].size() || exp_dac.size() != 0) begin
          failures++; $display("run %0d of branch %0d: %0d cycles", n_runs, seq[j], run_len);
        end
      end
    end
    checks++;
    if (n_runs != 64 || n_underrun != 0) begin failures++; $display("%0d runs, %0d underruns", n_runs, n_underrun); end
    $display("branch runs %0d, memory words %0d of %0d", n_runs, w[0].size() + w[1].size() + w[2].size(), MEM_DEPTH);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (250000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
