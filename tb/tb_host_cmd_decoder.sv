// tb_host_cmd_decoder -- feeds host command byte streams (with random gaps
// between bytes) and checks every memory and branch-table write the
// decoder produces against the list the commands imply.
module tb_host_cmd_decoder;
  import awg_pkg::*;
  import tb_awg_pkg::*;
  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  logic       byte_valid = 1'b0;
  logic [7:0] byte_data = '0;
  logic       mem_wr_valid, br_wr_valid;
  mem_wr_t    mem_wr;
  br_wr_t     br_wr;
  int         checks = 0, failures = 0;
  mem_wr_t    exp_mem [$];
  br_wr_t     exp_br [$];

  always #10 clk = ~clk;

  host_cmd_decoder dut (.*);

  task automatic send(bq_t b);
    foreach (b[i]) begin
      @(negedge clk);
      byte_valid = 1'b1; byte_data = b[i];
      @(negedge clk);
      byte_valid = 1'b0;
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
  endtask

  always @(posedge clk) begin
    if (mem_wr_valid) begin
      checks++;
      if (exp_mem.size() == 0 || mem_wr !== exp_mem[0]) begin
        failures++; $display("unexpected mem write %p", mem_wr);
      end
      if (exp_mem.size() != 0) void'(exp_mem.pop_front());
    end
    if (br_wr_valid) begin
      checks++;
      if (exp_br.size() == 0 || br_wr !== exp_br[0]) begin
        failures++; $display("unexpected branch write %p", br_wr);
      end
      if (exp_br.size() != 0) void'(exp_br.pop_front());
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 30; n++) begin
      int unsigned board, ch, addr, len, kind;
      wq_t w;
      board = $urandom_range(0, 3); ch = $urandom_range(0, 2);
      kind  = $urandom_range(0, 3);
      if (kind == 0) begin
        int unsigned idx;
        idx  = $urandom_range(0, 7);
        addr = $urandom_range(0, 7679);
        exp_br.push_back('{board: 2'(board), ch: 2'(ch), idx: 3'(idx), addr: 13'(addr)});
        send(cmd_wr_branch(board, ch, idx, addr));
      end else if (kind == 1) begin
        send('{8'h0F});   // unknown opcode: skipped
      end else begin
        len  = $urandom_range(0, 6);
        addr = $urandom_range(0, 7600);
        w    = {};
        for (int i = 0; i < len; i++) begin
          w.push_back(16'($urandom));
          exp_mem.push_back('{board: 2'(board), ch: 2'(ch), addr: 13'(addr + i), data: w[i]});
        end
        send(cmd_wr_mem(board, ch, addr, w));
      end
    end
    repeat (5) @(posedge clk);
    checks++;
    if (exp_mem.size() != 0 || exp_br.size() != 0) begin
      failures++; $display("missing writes: mem %0d branch %0d", exp_mem.size(), exp_br.size());
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
