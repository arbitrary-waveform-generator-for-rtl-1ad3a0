// tb_awg_fpga -- end-to-end test of a stack of three boards (a master and
// two slaves, nine channels) at full memory size.
//
// The host side is a behavioural FT245RL model: every waveform and every
// branch-table entry reaches the boards as USB bytes through the master
// and, for the slaves, over the board-to-board link. Each channel gets
// three branches: 0 a static potential (one held value), 1 a "transport"
// branch of cubic and quadratic segments, 2 a branch of random records in
// three steps that ends in a run of one-sample records too short to be
// fetched in time (forcing underruns). The TTL trigger and branch lines
// then run branches 1, 0, 2 (with its steps), 1 again. Every DAC code of
// every channel is checked against closed-form values, all nine channels
// must start on the same clock, and each mechanism must occur at least
// once: USB upload, link forwarding, all four record kinds, branch
// switching, step pause and resume, branch end, underrun and a trigger
// ignored while running.
module tb_awg_fpga;
  import awg_pkg::*;
  import tb_awg_pkg::*;
  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        ft_rxf_n, ft_rd_n;
  logic [7:0]  ft_data;
  logic        ttl_trig = 1'b0;
  logic [2:0]  ttl_branch = '0;
  link_t       link [3];
  link_t       unused_link;
  logic [15:0] dac [3][N_CH];
  logic [N_CH-1:0] idle [3], paused [3], running [3], step_done [3],
                   branch_done [3], underrun [3], trig_ignored [3];
  int          checks = 0, failures = 0;
  wq_t         codes [3][N_CH][3];   // board, channel, branch
  wq_t         exp_dac [3][N_CH];
  logic        was_running [3][N_CH];
  int          n_step = 0, n_branch_end = 0, n_underrun = 0, n_ignored = 0,
               n_link_bytes = 0, n_starts [3], n_modes [4], n_unsync = 0;

  always #10 clk = ~clk;

  ft245rl_model u_usb (.rxf_n(ft_rxf_n), .rd_n(ft_rd_n), .data(ft_data));

  awg_fpga #(.IS_MASTER(1'b1), .BOARD_ID(0)) u_master (
    .clk, .rst_n, .ft_rxf_n, .ft_rd_n, .ft_data, .ttl_trig, .ttl_branch,
    .link_in(unused_link), .link_out(link[0]), .dac(dac[0]),
    .ch_idle(idle[0]), .ch_paused(paused[0]), .ch_running(running[0]),
    .ch_step_done(step_done[0]), .ch_branch_done(branch_done[0]),
    .ch_underrun(underrun[0]), .ch_trig_ignored(trig_ignored[0])
  );

  for (genvar b = 1; b < 3; b++) begin : g_slave
    logic rd_unused;
    awg_fpga #(.IS_MASTER(1'b0), .BOARD_ID(b)) u_slave (
      .clk, .rst_n, .ft_rxf_n(1'b1), .ft_rd_n(rd_unused), .ft_data(8'h00),
      .ttl_trig(1'b0), .ttl_branch(3'b000),
      .link_in(link[b-1]), .link_out(link[b]), .dac(dac[b]),
      .ch_idle(idle[b]), .ch_paused(paused[b]), .ch_running(running[b]),
      .ch_step_done(step_done[b]), .ch_branch_done(branch_done[b]),
      .ch_underrun(underrun[b]), .ch_trig_ignored(trig_ignored[b])
    );
  end

  assign unused_link = '0;

  // record kinds seen by the master's channel 0 loader
  always @(posedge clk) begin
    if (rst_n && u_master.g_ch[0].u_ch.u_loader.take &&
        u_master.g_ch[0].u_ch.u_loader.state == 3'd0)
      n_modes[u_master.g_ch[0].u_ch.u_loader.word_data[15:14]]++;
  end

  always @(posedge clk) if (rst_n) begin
    n_link_bytes += int'(link[1].byte_valid);
    for (int b = 0; b < 3; b++) begin
      n_step       += $countones(step_done[b]);
      n_branch_end += $countones(branch_done[b]);
      n_underrun   += $countones(underrun[b]);
      n_ignored    += $countones(trig_ignored[b]);
    end
  end

  logic [N_CH-1:0] idle_q [3];
  always @(negedge clk) if (rst_n) begin
    int leaving;
    leaving = 0;
    for (int b = 0; b < 3; b++)
      for (int c = 0; c < N_CH; c++) begin
        if (idle_q[b][c] && !idle[b][c]) leaving++;
        if (was_running[b][c]) begin
          checks++;
          if (exp_dac[b][c].size() == 0 || dac[b][c] !== exp_dac[b][c][0]) begin
            failures++;
            if (failures < 20) $display("%0t board %0d ch %0d: dac %04x expected %04x", $time, b, c,
                                        dac[b][c], (exp_dac[b][c].size() != 0) ? exp_dac[b][c][0] : 16'h0);
          end
          if (exp_dac[b][c].size() != 0) void'(exp_dac[b][c].pop_front());
        end
        was_running[b][c] = running[b][c];
      end
    if (leaving != 0) begin
      checks++;
      if (leaving != 3 * N_CH) begin failures++; n_unsync++; $display("channels started apart"); end
    end
    for (int b = 0; b < 3; b++) idle_q[b] = idle[b];
  end

  task automatic send(bq_t bytes);
    foreach (bytes[i]) u_usb.push(bytes[i]);
  endtask

  task automatic run_branch(int unsigned br, int unsigned nsteps);
    for (int b = 0; b < 3; b++)
      for (int c = 0; c < N_CH; c++) exp_dac[b][c] = codes[b][c][br];
    @(negedge clk); ttl_branch = 3'(br);
    repeat (2) @(negedge clk);
    ttl_trig = 1'b1;
    repeat (2) @(negedge clk);
    ttl_trig = 1'b0;
    while (idle[0][0]) @(negedge clk);
    n_starts[br]++;
    for (int st = 1; st < nsteps; st++) begin
      wait (paused[0] == '1 && paused[1] == '1 && paused[2] == '1);
      repeat (20) @(negedge clk);
      ttl_branch = 3'($urandom);       // ignored while paused
      ttl_trig = 1'b1;
      repeat (2) @(negedge clk);
      ttl_trig = 1'b0;
      while (paused[0][0]) @(negedge clk);
    end
    wait (idle[0] == '1 && idle[1] == '1 && idle[2] == '1);
    repeat (3) @(negedge clk);
    for (int b = 0; b < 3; b++)
      for (int c = 0; c < N_CH; c++) begin
        checks++;
        if (exp_dac[b][c].size() != 0) begin
          failures++; $display("branch %0d board %0d ch %0d: %0d codes missing", br, b, c, exp_dac[b][c].size());
        end
      end
  endtask

  localparam int unsigned BASE [3] = '{0, 200, 2000};

  initial begin
    for (int i = 0; i < 3; i++) n_starts[i] = 0;
    for (int i = 0; i < 4; i++) n_modes[i] = 0;
    for (int b = 0; b < 3; b++) begin
      idle_q[b] = '1;
      for (int c = 0; c < N_CH; c++) was_running[b][c] = 1'b0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // upload: every board, channel and branch over USB
    for (int b = 0; b < 3; b++)
      for (int c = 0; c < N_CH; c++)
        for (int br = 0; br < 3; br++) begin
          wq_t w, cd;
          if (br == 0) begin
            seg_t s;
            s = rand_seg(MODE_HOLD, 40, 1'b0, 1'b1);
            w = rec_seg(MODE_HOLD, s);
            cd = {};
            for (int k = 0; k < 40; k++) cd.push_back(poly_at(s, k));
          end else if (br == 1) begin
            wq_t w2, c2;
            rand_branch(w, cd, 6, 0, MODE_CUBIC, 1'b0);
            rand_branch(w2, c2, 2, 0, MODE_QUAD);
            w = {w, w2}; cd = {cd, c2};
          end else begin
            wq_t tail;
            tail = {};
            rand_branch(w, cd, 9, 3, -1, 1'b0);
            // a run of one-sample records: three words per cycle of output
            for (int k = 0; k < 12; k++) begin
              wq_t one;
              one = '{16'($urandom)};
              tail = {tail, rec_samples(one, 1'b0, k == 11)};
              cd.push_back(one[0]);
            end
            w = {w, tail};
          end
          codes[b][c][br] = cd;
          send(cmd_wr_mem(b, c, BASE[br], w));
          send(cmd_wr_branch(b, c, br, BASE[br]));
        end
    $display("queued %0d bytes", u_usb.pending());
    while (u_usb.pending() != 0) @(negedge clk);
    repeat (20) @(negedge clk);
    $display("upload done at %0t", $time);

    run_branch(1, 1);
    run_branch(0, 1);
    run_branch(2, 3);
    // branch 1 again, with a trigger while it runs
    fork
      run_branch(1, 1);
      begin
        repeat (40) @(negedge clk);
        ttl_trig = 1'b1;
        repeat (2) @(negedge clk);
        ttl_trig = 1'b0;
      end
    join

    $display("mechanisms: usb_bytes=%0d link_bytes=%0d samples=%0d hold=%0d quad=%0d cubic=%0d",
             u_usb.delivered, n_link_bytes, n_modes[0], n_modes[1], n_modes[2], n_modes[3]);
    $display("            branch_starts=%0d/%0d/%0d steps=%0d branch_ends=%0d underruns=%0d ignored=%0d",
             n_starts[0], n_starts[1], n_starts[2], n_step, n_branch_end, n_underrun, n_ignored);
    checks++; if (u_usb.delivered == 0 || n_link_bytes == 0) begin failures++; $display("no upload"); end
    for (int m = 0; m < 4; m++) begin
      checks++; if (n_modes[m] == 0) begin failures++; $display("record kind %0d never played", m); end
    end
    for (int br = 0; br < 3; br++) begin
      checks++; if (n_starts[br] == 0) begin failures++; $display("branch %0d never run", br); end
    end
    checks++; if (n_step == 0)       begin failures++; $display("no step pause"); end
    checks++; if (n_branch_end == 0) begin failures++; $display("no branch end"); end
    checks++; if (n_underrun == 0)   begin failures++; $display("no underrun"); end
    checks++; if (n_ignored == 0)    begin failures++; $display("no ignored trigger"); end
    checks++; if (u_usb.violations != 0) begin failures++; $display("USB read timing violated"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired, pending %0d delivered %0d", u_usb.pending(), u_usb.delivered);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
