// tb_wave_ram -- writes random words to random addresses of the full-size
// memory, then reads addresses back with random reads interleaved with
// writes, checking each read one cycle later against a reference copy.
module tb_wave_ram;
  localparam int DEPTH = 7680;
  logic        clk = 1'b0;
  logic        we = 1'b0, re = 1'b0;
  logic [12:0] waddr = '0, raddr = '0;
  logic [15:0] wdata = '0, rdata;
  int          checks = 0, failures = 0;
  logic [15:0] ref_mem [int];

  always #10 clk = ~clk;

  wave_ram dut (.*);

  initial begin
    // fill a spread of addresses, including both ends
    for (int i = 0; i < 600; i++) begin
      int unsigned a;
      a = (i == 0) ? 0 : (i == 1) ? DEPTH - 1 : $urandom_range(0, DEPTH - 1);
      @(negedge clk);
      we = 1'b1; waddr = 13'(a); wdata = 16'($urandom);
      ref_mem[a] = wdata;
    end
    @(negedge clk); we = 1'b0;
    // write beyond the end: must be ignored
    @(negedge clk); we = 1'b1; waddr = 13'(DEPTH); wdata = 16'hDEAD;
    @(negedge clk); we = 1'b0;
    for (int i = 0; i < 2000; i++) begin
      int unsigned a, k;
      k = $urandom_range(0, ref_mem.num() - 1);
      void'(ref_mem.first(a));
      repeat (k) void'(ref_mem.next(a));
      @(negedge clk);
      re = 1'b1; raddr = 13'(a);
      we = ($urandom_range(0, 3) == 0);
      if (we) begin
        int unsigned wa;
        wa = $urandom_range(0, DEPTH - 1);
        if (wa == a) wa = (a + 1) % DEPTH;
        waddr = 13'(wa); wdata = 16'($urandom); ref_mem[wa] = wdata;
      end
      @(negedge clk);
      re = 1'b0; we = 1'b0;
      checks++;
      if (rdata !== ref_mem[a]) begin failures++; $display("addr %0d: %04x vs %04x", a, rdata, ref_mem[a]); end
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
