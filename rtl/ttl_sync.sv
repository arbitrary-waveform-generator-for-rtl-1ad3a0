// ttl_sync -- brings the external TTL control lines into the clock domain.
//
// Three TTL lines choose one of eight waveform branches and a fourth,
// the trigger, starts a waveform on its rising edge. Each line passes two
// flip-flops. The branch number is the second flop's output, so a change
// on the lines is seen two clock cycles (40 ns at 50 MHz) later, the
// switching latency the published instrument specifies. The trigger's
// rising edge is turned into a one-cycle pulse, trig_rise, which is also
// registered so that it appears on the same cycle as a branch change
// made together with it.
//
// Using plain two-flop synchronisers, and resetting them to "low", is this
// design's choice.
module ttl_sync
  import awg_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                trig_in,     // asynchronous TTL trigger
  input  logic [BRANCH_W-1:0] branch_in,   // asynchronous TTL branch select
  output logic                trig_rise,   // one-cycle pulse per rising edge
  output logic [BRANCH_W-1:0] branch       // synchronised branch select
);

  logic                trig_s1, trig_s2;
  logic [BRANCH_W-1:0] branch_s1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trig_s1   <= 1'b0;
      trig_s2   <= 1'b0;
      trig_rise <= 1'b0;
      branch_s1 <= '0;
      branch    <= '0;
    end else begin
      trig_s1   <= trig_in;
      trig_s2   <= trig_s1;
      trig_rise <= trig_s1 & ~trig_s2;
      branch_s1 <= branch_in;
      branch    <= branch_s1;
    end
  end

endmodule
