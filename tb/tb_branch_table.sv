// tb_branch_table -- checks that all eight entries reset to zero and that
// random writes are read back from the entry written and no other.
module tb_branch_table;
  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        we = 1'b0;
  logic [2:0]  widx = '0, ridx = '0;
  logic [12:0] waddr = '0, raddr;
  int          checks = 0, failures = 0;
  logic [12:0] ref_tbl [8];

  always #10 clk = ~clk;

  branch_table dut (.*);

  task automatic check_all();
    for (int i = 0; i < 8; i++) begin
      ridx = 3'(i); #1;
      checks++;
      if (raddr !== ref_tbl[i]) begin failures++; $display("entry %0d: %0d vs %0d", i, raddr, ref_tbl[i]); end
    end
  endtask

  initial begin
    for (int i = 0; i < 8; i++) ref_tbl[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check_all();
    for (int n = 0; n < 60; n++) begin
      @(negedge clk);
      we = 1'b1; widx = 3'($urandom); waddr = 13'($urandom_range(0, 7679));
      ref_tbl[widx] = waddr;
      @(negedge clk);
      we = 1'b0;
      check_all();
    end
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
