// tb_wave_fetch -- the fetch unit reads a memory model whose word at
// address a is f(a). The consumer takes words with random back-pressure;
// every word must be f() of the next address after the last start,
// wrapping from 7679 to 0, and a restart must drop everything in flight.
// With the consumer always ready, the first word must be offered on the
// cycle after the start pulse and one word every cycle after that.
module tb_wave_fetch;
  localparam int DEPTH = 7680;
  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        start = 1'b0;
  logic [12:0] start_addr = '0;
  logic        ram_re;
  logic [12:0] ram_raddr;
  logic [15:0] ram_rdata;
  logic        word_valid, word_ready;
  logic [15:0] word_data;
  int          checks = 0, failures = 0;
  int unsigned exp_addr = 0;
  bit          rand_ready = 1'b1;
  logic        ready_r = 1'b0;

  always #10 clk = ~clk;

  function automatic logic [15:0] f(int unsigned a);
    return 16'((a * 37) ^ 16'h5A5A);
  endfunction

  // memory model, one-cycle read latency
  always @(posedge clk) if (ram_re) ram_rdata <= f(ram_raddr);

  assign word_ready = rand_ready ? ready_r : 1'b1;
  always @(negedge clk) ready_r = ($urandom_range(0, 2) != 0);

  wave_fetch dut (.*);

  always @(posedge clk) begin
    if (rst_n && !start && word_valid && word_ready) begin
      checks++;
      if (word_data !== f(exp_addr)) begin
        failures++; $display("word %04x expected f(%0d)=%04x", word_data, exp_addr, f(exp_addr));
      end
      exp_addr = (exp_addr + 1) % DEPTH;
    end
    if (rst_n && ram_re) begin
      checks++;
      if (ram_raddr >= DEPTH) begin failures++; $display("read beyond memory"); end
    end
  end

  task automatic restart(int unsigned a);
    @(negedge clk);
    start = 1'b1; start_addr = 13'(a);
    @(posedge clk);
    exp_addr = a;
    @(negedge clk);
    start = 1'b0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // random back-pressure, several restarts including one across the wrap
    for (int n = 0; n < 12; n++) begin
      restart((n == 3) ? DEPTH - 7 : $urandom_range(0, DEPTH - 1));
      repeat ($urandom_range(2, 80)) @(posedge clk);
    end
    // full rate
    rand_ready = 1'b0;
    restart(100);
    // after restart() we are at the negedge of cycle start+1
    checks++;
    if (!word_valid) begin failures++; $display("first word not offered on the cycle after start"); end
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      checks++;
      if (!word_valid) begin failures++; $display("stall at full rate, cycle %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
