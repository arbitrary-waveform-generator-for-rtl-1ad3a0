// tb_workload_pulses -- pulse-shaping workloads on one full-size channel.
//
// Three branches hold the amplitude envelopes used to shape microwave and
// laser pulses:
//   0  a rectangular pulse: 20 us (1000 cycles) at a fixed level, then 0;
//   1  a Gaussian pulse with 45 us FWHM, cut off at four times the FWHM
//      (180 us, 9000 cycles), as cubic Hermite segments of 90 cycles;
//   2  a sin^2 intensity ramp rising over 100 us (5000 cycles) as raw
//      samples, one per clock (5002 memory words).
// The testbench builds the records itself from the ideal curves, uploads
// them through the channel's write port, triggers each branch and checks
// every DAC code twice: exactly, against the closed-form value of the
// segment the records encode, and approximately, within 2 codes of the
// ideal curve. It also checks the length of each pulse in cycles.
// The Gaussian does not fit as raw samples (9002 words > 7680); as cubic
// segments it takes 1200 words.
module tb_workload_pulses;
  import awg_pkg::*;
  import tb_awg_pkg::*;
  localparam real AMP = 30000.0;
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
  real         ideal [$];
  logic        was_running = 1'b0;
  int          run_len = 0, n_underrun = 0;

  always #10 clk = ~clk;

  awg_channel dut (.*);

  always @(posedge clk) if (rst_n) begin
    if (running) run_len++;
    n_underrun += int'(underrun);
  end

  always @(negedge clk) if (rst_n) begin
    if (was_running) begin
      real err;
      checks++;
      if (exp_dac.size() == 0 || dac !== exp_dac[0]) begin
        failures++;
        if (failures < 10) $display("dac %04x expected %04x", dac, (exp_dac.size() != 0) ? exp_dac[0] : 16'h0);
      end
      if (exp_dac.size() != 0) void'(exp_dac.pop_front());
      checks++;
      err = (ideal.size() != 0) ? real'($signed(dac)) - ideal[0] : 1.0e9;
      if (err > 2.0 || err < -2.0) begin
        failures++;
        if (failures < 10) $display("dac %0d is %f from the ideal curve", $signed(dac), err);
      end
      if (ideal.size() != 0) void'(ideal.pop_front());
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

  function automatic logic signed [47:0] fx(real x);
    return 48'(longint'(x * 4294967296.0));   // rounds to nearest
  endfunction

  // Cubic Hermite segment from y0 (integer) with slopes m0, m1 to y1 over L cycles.
  function automatic seg_t hermite(real y0, real y1, real m0, real m1, int L, bit last);
    real a, b, c, d;
    seg_t s;
    s = '0;
    a = real'($rtoi(y0 + 0.5));
    b = m0;
    c = (3.0 * (y1 - a) - (2.0 * m0 + m1) * L) / (L * L);
    d = (2.0 * (a - y1) + (m0 + m1) * L) / (L * L * L);
    s.v0 = {16'($rtoi(a)), 32'h0};
    s.d1 = fx(b + c + d);
    s.d2 = fx(2.0 * c + 6.0 * d);
    s.d3 = fx(6.0 * d);
    s.dur = 16'(L);
    s.branch_end = last;
    return s;
  endfunction

  function automatic real gauss(real k);
    real sigma, mu;
    sigma = 45.0e-6 / 2.354820045 / 20.0e-9;   // in cycles
    mu    = 4500.0;
    return AMP * $exp(-((k - mu) * (k - mu)) / (2.0 * sigma * sigma));
  endfunction

  function automatic real dgauss(real k);
    real sigma, mu;
    sigma = 45.0e-6 / 2.354820045 / 20.0e-9;
    mu    = 4500.0;
    return -gauss(k) * (k - mu) / (sigma * sigma);
  endfunction

  task automatic run(int unsigned br, int unsigned expect_len);
    branch = 3'(br);
    run_len = 0;
    @(negedge clk); trig = 1'b1;
    @(negedge clk); trig = 1'b0;
    while (idle) @(negedge clk);
    wait (idle);
    repeat (3) @(negedge clk);
    checks++;
    if (run_len != expect_len || exp_dac.size() != 0) begin
      failures++; $display("branch %0d ran %0d cycles, %0d codes left", br, run_len, exp_dac.size());
    end
  endtask

  initial begin
    wq_t  w [3];
    wq_t  codes [3];
    real  curve [3][$];
    seg_t s;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // 0: rectangular pulse, 20 us at 3/4 of full scale, then back to 0
    s = '0; s.v0 = {16'd24000, 32'h0}; s.dur = 16'd1000;
    w[0] = rec_seg(MODE_HOLD, s);
    for (int k = 0; k < 1000; k++) begin codes[0].push_back(16'd24000); curve[0].push_back(24000.0); end
    s = '0; s.dur = 16'd1; s.branch_end = 1'b1;
    w[0] = {w[0], rec_seg(MODE_HOLD, s)};
    codes[0].push_back(16'd0); curve[0].push_back(0.0);

    // 1: Gaussian, 100 segments of 90 cycles
    for (int i = 0; i < 100; i++) begin
      real k0, k1;
      k0 = 90.0 * i; k1 = k0 + 90.0;
      s = hermite(gauss(k0), gauss(k1), dgauss(k0), dgauss(k1), 90, i == 99);
      w[1] = {w[1], rec_seg(MODE_CUBIC, s)};
      for (int k = 0; k < 90; k++) begin
        codes[1].push_back(poly_at(s, k));
        curve[1].push_back(gauss(k0 + k));
      end
    end

    // 2: sin^2 ramp over 5000 cycles: sin(wt)^2 with w/2pi = 2.5 kHz rises from 0 to 1 in 100 us
    begin
      wq_t smp;
      for (int k = 0; k < 5000; k++) begin
        real y;
        y = AMP * $pow($sin(2.0 * 3.14159265358979 * 2.5e3 * k * 20.0e-9), 2.0);
        smp.push_back(16'($rtoi(y + 0.5)));
        codes[2].push_back(16'($rtoi(y + 0.5)));
        curve[2].push_back(y);
      end
      w[2] = rec_samples(smp, 1'b0, 1'b1);
    end

    write_words(0, w[0]);    set_branch(0, 0);
    write_words(100, w[1]);  set_branch(1, 100);
    write_words(2600, w[2]); set_branch(2, 2600);
    $display("memory words: rectangular %0d, Gaussian %0d, sin^2 ramp %0d (of %0d)",
             w[0].size(), w[1].size(), w[2].size(), MEM_DEPTH);
    checks++;
    if (w[1].size() + w[2].size() + 100 > MEM_DEPTH) failures++;

    for (int br = 0; br < 3; br++) begin
      exp_dac = codes[br];
      ideal   = curve[br];
      run(br, codes[br].size());
    end
    checks++;
    if (n_underrun != 0) begin failures++; $display("%0d underruns", n_underrun); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
