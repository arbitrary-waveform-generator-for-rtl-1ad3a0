// host_cmd_decoder -- turns the host's byte stream into memory and
// branch-table writes.
//
// The host uploads waveforms and the branch configuration of every channel
// over one USB link shared by a master board and up to two slaves. Each
// command starts with a byte {board[1:0], channel[1:0], opcode[3:0]}:
//   CMD_WR_MEM    : addr_hi, addr_lo, n_hi, n_lo, then n words sent high
//                   byte first; the words go to consecutive addresses.
//   CMD_WR_BRANCH : branch index, addr_hi, addr_lo; sets where that branch
//                   starts in the channel's memory.
// Unknown opcodes are skipped (one byte). The decoder does not filter by
// board or channel: every board decodes the whole stream and keeps the
// writes addressed to it.
//
// Timing: a write request is a one-cycle pulse on the cycle after the byte
// that completes it. Bytes may arrive on any cycle.
//
// The published instrument says the host uploads waveform data and the
// channel and branch configuration; the byte format is this design's own.
module host_cmd_decoder
  import awg_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       byte_valid,
  input  logic [7:0] byte_data,
  output logic       mem_wr_valid,
  output mem_wr_t    mem_wr,
  output logic       br_wr_valid,
  output br_wr_t     br_wr
);

  typedef enum logic [3:0] {
    S_CMD, S_ADDR_HI, S_ADDR_LO, S_N_HI, S_N_LO, S_DATA_HI, S_DATA_LO,
    S_BR_IDX, S_BR_HI, S_BR_LO
  } state_e;

  state_e              state;
  logic [BOARD_W-1:0]  board;
  logic [CH_W-1:0]     ch;
  logic [15:0]         addr;
  logic [15:0]         nwords;
  logic [7:0]          hi;
  logic [BRANCH_W-1:0] idx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_CMD;
      board        <= '0;
      ch           <= '0;
      addr         <= '0;
      nwords       <= '0;
      hi           <= '0;
      idx          <= '0;
      mem_wr_valid <= 1'b0;
      mem_wr       <= '0;
      br_wr_valid  <= 1'b0;
      br_wr        <= '0;
    end else begin
      mem_wr_valid <= 1'b0;
      br_wr_valid  <= 1'b0;
      if (byte_valid) begin
        unique case (state)
          S_CMD: begin
            board <= byte_data[7:6];
            ch    <= byte_data[5:4];
            if (byte_data[3:0] == CMD_WR_MEM)         state <= S_ADDR_HI;
            else if (byte_data[3:0] == CMD_WR_BRANCH) state <= S_BR_IDX;
          end
          S_ADDR_HI: begin addr[15:8] <= byte_data; state <= S_ADDR_LO; end
          S_ADDR_LO: begin addr[7:0]  <= byte_data; state <= S_N_HI;    end
          S_N_HI:    begin nwords[15:8] <= byte_data; state <= S_N_LO;  end
          S_N_LO: begin
            nwords[7:0] <= byte_data;
            state       <= ({nwords[15:8], byte_data} == 16'd0) ? S_CMD : S_DATA_HI;
          end
          S_DATA_HI: begin hi <= byte_data; state <= S_DATA_LO; end
          S_DATA_LO: begin
            mem_wr_valid <= 1'b1;
            mem_wr       <= '{board: board, ch: ch, addr: addr[ADDR_W-1:0],
                              data: {hi, byte_data}};
            addr         <= addr + 16'd1;
            nwords       <= nwords - 16'd1;
            state        <= (nwords == 16'd1) ? S_CMD : S_DATA_HI;
          end
          S_BR_IDX: begin idx <= byte_data[BRANCH_W-1:0]; state <= S_BR_HI; end
          S_BR_HI:  begin addr[15:8] <= byte_data; state <= S_BR_LO; end
          S_BR_LO: begin
            br_wr_valid <= 1'b1;
            br_wr       <= '{board: board, ch: ch, idx: idx,
                             addr: {addr[ADDR_W-1:8], byte_data}};
            state       <= S_CMD;
          end
          default: state <= S_CMD;
        endcase
      end
    end
  end

endmodule
