// tb_usb_fifo_rx -- checks the USB FIFO read handshake against a
// behavioural FT245RL model: every queued byte must come out once, in
// order, RD# low pulses must meet the chip's minimum width (exactly
// RD_LOW_CYC = 3 cycles), and one byte must take at least 8 cycles.
module tb_usb_fifo_rx;
  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  logic       rxf_n, rd_n;
  logic [7:0] data;
  logic       byte_valid;
  logic [7:0] byte_data;
  int         checks = 0, failures = 0;
  logic [7:0] sent [$];
  int         got = 0;
  int         last_cycle = -100, cycle = 0, low_len = 0;

  always #10 clk = ~clk;

  ft245rl_model u_chip (.rxf_n(rxf_n), .rd_n(rd_n), .data(data));

  usb_fifo_rx dut (
    .clk(clk), .rst_n(rst_n), .rxf_n(rxf_n), .rd_n(rd_n), .data_in(data),
    .byte_valid(byte_valid), .byte_data(byte_data)
  );

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (!rd_n) low_len <= low_len + 1;
    else if (low_len != 0) begin
      checks++;
      if (low_len != 3) begin failures++; $display("RD# low for %0d cycles", low_len); end
      low_len <= 0;
    end
    if (rst_n && byte_valid) begin
      checks++;
      if (sent.size() == 0 || byte_data !== sent[0]) begin
        failures++;
        $display("byte %0d: got %02x", got, byte_data);
      end
      if (sent.size() != 0) void'(sent.pop_front());
      checks++;
      if (cycle - last_cycle < 8) begin failures++; $display("bytes too close: %0d", cycle - last_cycle); end
      last_cycle <= cycle;
      got++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 40; i++) begin
      logic [7:0] b;
      b = 8'($urandom);
      sent.push_back(b);
      u_chip.push(b);
      if (i == 20) repeat (50) @(posedge clk);   // a pause in the stream
    end
    wait (sent.size() == 0);
    repeat (30) @(posedge clk);
    checks++;
    if (got != 40) begin failures++; $display("got %0d bytes", got); end
    checks++;
    if (u_chip.violations != 0) begin failures++; $display("RD# timing violations %0d", u_chip.violations); end
    checks++;
    if (byte_valid || !rd_n) failures++;
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
