// tb_ttl_sync -- changes the branch lines and the trigger at random and
// checks that the branch number follows the lines exactly two clock cycles
// (40 ns) later and that each trigger rising edge gives one pulse, also
// two cycles later.
module tb_ttl_sync;
  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  logic       trig_in = 1'b0;
  logic [2:0] branch_in = '0;
  logic       trig_rise;
  logic [2:0] branch;
  int         checks = 0, failures = 0;
  logic [2:0] br_hist [3];
  logic       tr_hist [4];
  int         rises = 0, pulses = 0;

  always #10 clk = ~clk;

  ttl_sync dut (.*);

  // Inputs change away from the clock edge; history sampled at each edge.
  always @(posedge clk) begin
    if (rst_n) begin
      br_hist[2] = br_hist[1]; br_hist[1] = br_hist[0]; br_hist[0] = branch_in;
      tr_hist[3] = tr_hist[2]; tr_hist[2] = tr_hist[1]; tr_hist[1] = tr_hist[0]; tr_hist[0] = trig_in;
    end
  end

  always @(negedge clk) begin
    if (rst_n) begin
      checks++;
      if (branch !== br_hist[1]) begin failures++; $display("branch %0d expected %0d", branch, br_hist[1]); end
      checks++;
      if (trig_rise !== (tr_hist[1] && !tr_hist[2])) begin failures++; $display("trigger pulse wrong"); end
      if (trig_rise) pulses++;
    end
  end

  initial begin
    for (int i = 0; i < 3; i++) br_hist[i] = '0;
    for (int i = 0; i < 4; i++) tr_hist[i] = 1'b0;
    repeat (3) @(posedge clk);
    #5 rst_n = 1'b1;
    for (int i = 0; i < 400; i++) begin
      @(posedge clk); #3;
      if ($urandom_range(0, 3) == 0) branch_in = 3'($urandom);
      if ($urandom_range(0, 4) == 0) begin
        if (!trig_in) rises++;
        trig_in = !trig_in;
      end
    end
    trig_in = 1'b0;
    repeat (4) @(posedge clk);
    checks++;
    if (pulses != rises) begin failures++; $display("%0d pulses for %0d edges", pulses, rises); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
