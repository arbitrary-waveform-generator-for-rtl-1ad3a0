// branch_table -- start addresses of one channel's waveform branches.
//
// A channel's memory is split by the host into up to N_BRANCH branches of
// any size; this table holds where each branch begins. The host writes an
// entry with (we, widx, waddr); the playback side looks up the selected
// branch combinationally (ridx -> raddr). All entries reset to address 0.
//
// Eight branches follow the published instrument; keeping the branch
// boundaries as start addresses in registers is this design's choice.
module branch_table #(
  parameter int unsigned N_BRANCH = 8,
  parameter int unsigned AW       = 13,
  parameter int unsigned IW       = $clog2(N_BRANCH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          we,
  input  logic [IW-1:0] widx,
  input  logic [AW-1:0] waddr,
  input  logic [IW-1:0] ridx,
  output logic [AW-1:0] raddr
);

  logic [AW-1:0] start_addr [N_BRANCH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_BRANCH; i++) start_addr[i] <= '0;
    end else if (we) begin
      start_addr[widx] <= waddr;
    end
  end

  assign raddr = start_addr[ridx];

endmodule
