// tb_awg_fpga_full -- one complete operation of a single board with every
// parameter at its default (a master, three channels, 7680-word memories).
//
// Workload: fast ion transport. Each channel gets an 8 us (400-cycle)
// transport waveform made of 33 cubic spline segments of 12 to 14 cycles,
// the shortest a cubic record (12 words) allows for gap-free playback,
// uploaded over USB through the FT245RL model into branch 3. A TTL
// trigger runs it. Checked: every DAC code against closed-form values, no
// underrun, the 400-cycle run length, the start latency (17 cycles from the
// TTL edge: 2 in the synchroniser, 15 in the channel), and that
// the memory used (396 words, 5.2 % of a channel) matches the few per cent the
// transport waveforms are reported to need.
module tb_awg_fpga_full;
  import awg_pkg::*;
  import tb_awg_pkg::*;
  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        ft_rxf_n, ft_rd_n;
  logic [7:0]  ft_data;
  logic        ttl_trig = 1'b0;
  logic [2:0]  ttl_branch = '0;
  link_t       link_in, link_out;
  logic [15:0] dac [N_CH];
  logic [N_CH-1:0] ch_idle, ch_paused, ch_running, ch_step_done, ch_branch_done,
                   ch_underrun, ch_trig_ignored;
  int          checks = 0, failures = 0;
  wq_t         exp_dac [N_CH];
  logic        was_running [N_CH];
  int          n_underrun = 0, run_cycles = 0, words_used = 0;

  always #10 clk = ~clk;

  ft245rl_model u_usb (.rxf_n(ft_rxf_n), .rd_n(ft_rd_n), .data(ft_data));

  awg_fpga dut (.*);

  assign link_in = '0;

  always @(posedge clk) if (rst_n) begin
    n_underrun += $countones(ch_underrun);
    if (ch_running[0]) run_cycles++;
  end

  always @(negedge clk) if (rst_n) begin
    for (int c = 0; c < N_CH; c++) begin
      if (was_running[c]) begin
        checks++;
        if (exp_dac[c].size() == 0 || dac[c] !== exp_dac[c][0]) begin
          failures++;
          if (failures < 20) $display("ch %0d: dac %04x expected %04x", c, dac[c],
                                      (exp_dac[c].size() != 0) ? exp_dac[c][0] : 16'h0);
        end
        if (exp_dac[c].size() != 0) void'(exp_dac[c].pop_front());
      end
      was_running[c] = ch_running[c];
    end
  end

  initial begin
    for (int c = 0; c < N_CH; c++) was_running[c] = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < N_CH; c++) begin
      wq_t w;
      bq_t bytes;
      w = {};
      exp_dac[c] = {};
      for (int i = 0; i < 33; i++) begin
        seg_t s;
        s = rand_seg(MODE_CUBIC, (i < 2) ? 14 : 12, 1'b0, i == 32);
        w = {w, rec_seg(MODE_CUBIC, s)};
        for (int k = 0; k < s.dur; k++) exp_dac[c].push_back(poly_at(s, k));
      end
      words_used = w.size();
      bytes = {cmd_wr_mem(0, c, 1000, w), cmd_wr_branch(0, c, 3, 1000)};
      foreach (bytes[i]) u_usb.push(bytes[i]);
    end
    while (u_usb.pending() != 0) @(negedge clk);
    repeat (20) @(negedge clk);
    ttl_branch = 3'd3;
    repeat (3) @(negedge clk);
    // trigger; the edge reaches the channels two cycles after it is sampled
    ttl_trig = 1'b1;
    begin
      int lat;
      lat = 0;
      while (ch_idle[0]) begin @(negedge clk); lat++; end
      while (!ch_running[0]) begin @(negedge clk); lat++; end
      // lat counts cycles from the TTL edge to the first running cycle; dac
      // loads at its end: 2 cycles of synchroniser, then 15 in the channel
      checks++;
      if (lat + 1 != 17) begin failures++; $display("start latency %0d cycles", lat + 1); end
      $display("trigger to first code: %0d cycles (%0d ns)", lat + 1, (lat + 1) * 20);
    end
    ttl_trig = 1'b0;
    wait (ch_idle == '1);
    repeat (3) @(negedge clk);
    for (int c = 0; c < N_CH; c++) begin
      checks++;
      if (exp_dac[c].size() != 0) begin failures++; $display("ch %0d: %0d codes missing", c, exp_dac[c].size()); end
    end
    checks++;
    if (run_cycles != 400) begin failures++; $display("ran %0d cycles, not 400", run_cycles); end
    checks++;
    if (n_underrun != 0) begin failures++; $display("%0d underruns", n_underrun); end
    checks++;
    if (words_used * 100 > MEM_DEPTH * 6) begin failures++; $display("uses %0d words", words_used); end
    $display("transport: %0d cycles (%0d ns), %0d words per channel (%0d.%0d %% of memory)",
             run_cycles, run_cycles * 20, words_used, words_used * 100 / MEM_DEPTH,
             (words_used * 1000 / MEM_DEPTH) % 10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
