// usb_fifo_rx -- FPGA side of the read port of an FT245RL-style USB FIFO.
//
// The host's bytes arrive through a USB-to-parallel FIFO chip. The chip
// pulls RXF# low while it holds a byte; the FPGA then pulls RD# low, waits
// for the data bus to settle, samples it and releases RD#. This module
// runs that handshake at the 50 MHz system clock and emits each byte as a
// one-cycle byte_valid pulse.
//
// Timing: RXF# passes a two-flop synchroniser. RD# is held low for
// RD_LOW_CYC cycles (60 ns by default, above the chip's 50 ns minimum
// pulse and its 50 ns data-valid delay); the bus is sampled on the last of
// these cycles. RD# then stays high for RD_HIGH_CYC cycles (80 ns), long
// enough for RXF# to rise and for the synchroniser to see it before the
// next byte is considered. One byte therefore takes at least
// RD_LOW_CYC + RD_HIGH_CYC + 1 cycles.
//
// The published instrument only names the FIFO chip; the handshake timing
// here comes from that chip family's usual read cycle and is this design's
// choice. Only uploads (host to FPGA) are handled; the write side of the
// chip is not used.
module usb_fifo_rx #(
  parameter int unsigned RD_LOW_CYC  = 3,
  parameter int unsigned RD_HIGH_CYC = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rxf_n,       // low: the FIFO holds a byte
  output logic       rd_n,        // read strobe, active low
  input  logic [7:0] data_in,     // FIFO data bus
  output logic       byte_valid,  // one-cycle pulse per byte
  output logic [7:0] byte_data
);

  typedef enum logic [1:0] {S_IDLE, S_READ, S_RECOVER} state_e;

  state_e     state;
  logic [1:0] rxf_sync;
  logic [3:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rxf_sync   <= 2'b11;
      state      <= S_IDLE;
      cnt        <= '0;
      rd_n       <= 1'b1;
      byte_valid <= 1'b0;
      byte_data  <= '0;
    end else begin
      rxf_sync   <= {rxf_sync[0], rxf_n};
      byte_valid <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (!rxf_sync[1]) begin
            rd_n  <= 1'b0;
            cnt   <= 4'(RD_LOW_CYC - 1);
            state <= S_READ;
          end
        end
        S_READ: begin
          if (cnt == '0) begin
            byte_data  <= data_in;
            byte_valid <= 1'b1;
            rd_n       <= 1'b1;
            cnt        <= 4'(RD_HIGH_CYC - 1);
            state      <= S_RECOVER;
          end else begin
            cnt <= cnt - 4'd1;
          end
        end
        S_RECOVER: begin
          if (cnt == '0) state <= S_IDLE;
          else           cnt   <= cnt - 4'd1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
