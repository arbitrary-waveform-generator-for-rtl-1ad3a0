// awg_fpga -- FPGA logic of one waveform-generator board.
//
// A board drives three 16-bit DACs at 50 MHz. Boards are stacked: one
// master, connected to the host over a USB FIFO chip and to the TTL
// trigger and branch lines, and up to two slaves that receive the host
// bytes, the trigger and the branch number from the master over a
// board-to-board connector, along with the clock. Nine channels then run
// in lock step from one USB link and one trigger.
//
// Datapath: usb_fifo_rx (master only) -> host_cmd_decoder -> writes to
// the channel memories and branch tables whose board number matches
// BOARD_ID. ttl_sync (master only) -> trigger pulse and branch number ->
// all channels. Each awg_channel plays its branch to its DAC port.
//
// Board-to-board link: the master drives link_out straight from registers
// (the USB byte register and the TTL synchronisers) and uses the same
// signals itself; a slave uses link_in, which is the master's link_out.
// Master and slaves therefore act on a trigger on the same clock edge, and
// the branch lines reach every channel two cycles (40 ns) after they
// change, as the published instrument specifies. A slave drives link_out
// with its link_in so boards could be chained; its USB and TTL inputs are
// unused.
//
// The DAC clock (the board clock, forwarded through an output pad) and the
// LVDS output buffers are FPGA I/O primitives outside this module; dac
// carries the registered 16-bit two's-complement codes. The master/slave
// split, the 40 ns branch latency, eight branches, three channels and the
// memory size follow the published instrument; the link signal set and
// the host byte format are this design's choice.
module awg_fpga
  import awg_pkg::*;
#(
  parameter bit          IS_MASTER = 1'b1,
  parameter int unsigned BOARD_ID  = 0,
  parameter int unsigned DEPTH     = awg_pkg::MEM_DEPTH
) (
  input  logic                clk,          // 50 MHz board clock
  input  logic                rst_n,
  // FT245RL read side (master)
  input  logic                ft_rxf_n,
  output logic                ft_rd_n,
  input  logic [7:0]          ft_data,
  // TTL inputs (master)
  input  logic                ttl_trig,
  input  logic [BRANCH_W-1:0] ttl_branch,
  // board-to-board connector
  input  link_t               link_in,
  output link_t               link_out,
  // DAC data
  output logic [SAMPLE_W-1:0] dac [N_CH],
  // status, per channel
  output logic [N_CH-1:0]     ch_idle,
  output logic [N_CH-1:0]     ch_paused,
  output logic [N_CH-1:0]     ch_running,
  output logic [N_CH-1:0]     ch_step_done,
  output logic [N_CH-1:0]     ch_branch_done,
  output logic [N_CH-1:0]     ch_underrun,
  output logic [N_CH-1:0]     ch_trig_ignored
);

  localparam int unsigned AW = $clog2(DEPTH);

  link_t   local_link;
  link_t   master_link;
  logic    mem_wr_valid, br_wr_valid;
  mem_wr_t mem_wr;
  br_wr_t  br_wr;

  generate
    if (IS_MASTER) begin : g_master
      logic                usb_valid;
      logic [7:0]          usb_byte;
      logic                trig_rise;
      logic [BRANCH_W-1:0] branch;

      usb_fifo_rx u_usb (
        .clk        (clk),
        .rst_n      (rst_n),
        .rxf_n      (ft_rxf_n),
        .rd_n       (ft_rd_n),
        .data_in    (ft_data),
        .byte_valid (usb_valid),
        .byte_data  (usb_byte)
      );

      ttl_sync u_ttl (
        .clk       (clk),
        .rst_n     (rst_n),
        .trig_in   (ttl_trig),
        .branch_in (ttl_branch),
        .trig_rise (trig_rise),
        .branch    (branch)
      );

      assign master_link = '{byte_valid: usb_valid, byte_data: usb_byte,
                             trig: trig_rise, branch: branch};
    end else begin : g_slave
      assign ft_rd_n     = 1'b1;
      assign master_link = link_in;
    end
  endgenerate

  assign local_link = master_link;
  assign link_out   = master_link;

  host_cmd_decoder u_dec (
    .clk          (clk),
    .rst_n        (rst_n),
    .byte_valid   (local_link.byte_valid),
    .byte_data    (local_link.byte_data),
    .mem_wr_valid (mem_wr_valid),
    .mem_wr       (mem_wr),
    .br_wr_valid  (br_wr_valid),
    .br_wr        (br_wr)
  );

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    logic mem_we, br_we;

    assign mem_we = mem_wr_valid && (mem_wr.board == BOARD_W'(BOARD_ID)) && (mem_wr.ch == CH_W'(c));
    assign br_we  = br_wr_valid  && (br_wr.board  == BOARD_W'(BOARD_ID)) && (br_wr.ch  == CH_W'(c));

    awg_channel #(.DEPTH(DEPTH), .AW(AW)) u_ch (
      .clk          (clk),
      .rst_n        (rst_n),
      .mem_we       (mem_we),
      .mem_addr     (AW'(mem_wr.addr)),
      .mem_data     (mem_wr.data),
      .br_we        (br_we),
      .br_idx       (br_wr.idx),
      .br_addr      (AW'(br_wr.addr)),
      .trig         (local_link.trig),
      .branch       (local_link.branch),
      .dac          (dac[c]),
      .idle         (ch_idle[c]),
      .paused       (ch_paused[c]),
      .running      (ch_running[c]),
      .step_done    (ch_step_done[c]),
      .branch_done  (ch_branch_done[c]),
      .underrun     (ch_underrun[c]),
      .trig_ignored (ch_trig_ignored[c])
    );
  end

endmodule
