// ft245rl_model -- behavioural model of the read side of an FT245RL USB
// FIFO chip, for simulation only (not synthesizable).
//
// Bytes queued with push() appear to the FPGA one at a time: RXF# goes low
// while a byte is held; after RD# falls the byte is driven on the bus
// T_DATA time units later (before that the bus carries junk); when RD#
// rises the byte is consumed and RXF# returns high for at least T_RXF_HIGH.
// The model counts RD# low pulses shorter than T_RD_MIN as violations.
// Time units are nanoseconds when the clock period is 20 units.
module ft245rl_model #(
  parameter int T_DATA     = 45,
  parameter int T_RD_MIN   = 50,
  parameter int T_RXF_HIGH = 80
) (
  output logic       rxf_n,
  input  logic       rd_n,
  output logic [7:0] data
);

  logic [7:0] q [$];
  int         violations = 0;
  int         delivered  = 0;

  function automatic void push(logic [7:0] b);
    q.push_back(b);
  endfunction

  function automatic int pending();
    return q.size();
  endfunction

  initial begin
    realtime t_fall;
    rxf_n = 1'b1;
    data  = 8'hA5;
    forever begin
      wait (q.size() > 0);
      #5 rxf_n = 1'b0;
      @(negedge rd_n);
      t_fall = $realtime;
      #(T_DATA) data = q[0];
      @(posedge rd_n);
      if ($realtime - t_fall < T_RD_MIN) violations++;
      void'(q.pop_front());
      delivered++;
      #10 rxf_n = 1'b1;
      data = 8'h5A;
      #(T_RXF_HIGH);
    end
  end

endmodule
