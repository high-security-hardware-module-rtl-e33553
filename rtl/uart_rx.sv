// uart_rx: UART receiver for the key bytes sent by the host GUI.
//
// Frame: one start bit (low), eight data bits LSB first, one stop bit (high),
// no parity (8N1). The line is passed through a two-flop synchroniser; a
// falling edge starts a frame, the start bit is re-checked half a bit later
// and each following bit is sampled in its middle, CLKS_PER_BIT clocks apart.
// A frame whose stop bit is high delivers `data` with a one-cycle `valid`
// strobe, at the middle of the stop bit; a low stop bit drops the byte and
// pulses `frame_err` instead.
//
// The published design only says the key enters the FPGA over UART; the
// frame format, the baud rate (115200 at a 100 MHz clock, CLKS_PER_BIT = 868)
// and the sampling scheme are this design's own choices.
module uart_rx #(
  parameter int unsigned CLKS_PER_BIT = 868
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rx,
  output logic [7:0] data,
  output logic       valid,
  output logic       frame_err
);

  typedef enum logic [1:0] {RX_IDLE, RX_START, RX_DATA, RX_STOP} rx_state_e;

  localparam int unsigned CW = (CLKS_PER_BIT > 1) ? $clog2(CLKS_PER_BIT) : 1;

  rx_state_e       state;
  logic [CW-1:0]   cnt;
  logic [2:0]      bit_idx;
  logic [7:0]      shreg;
  logic [1:0]      sync;

  wire rx_s = sync[1];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sync      <= 2'b11;
      state     <= RX_IDLE;
      cnt       <= '0;
      bit_idx   <= '0;
      shreg     <= '0;
      data      <= '0;
      valid     <= 1'b0;
      frame_err <= 1'b0;
    end else begin
      sync      <= {sync[0], rx};
      valid     <= 1'b0;
      frame_err <= 1'b0;
      unique case (state)
        RX_IDLE: begin
          cnt <= '0;
          if (!rx_s) state <= RX_START;
        end
        RX_START: begin
          if (cnt == CW'(CLKS_PER_BIT / 2 - 1)) begin
            cnt     <= '0;
            bit_idx <= '0;
            state   <= rx_s ? RX_IDLE : RX_DATA;   // glitch: back to idle
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        RX_DATA: begin
          if (cnt == CW'(CLKS_PER_BIT - 1)) begin
            cnt     <= '0;
            shreg   <= {rx_s, shreg[7:1]};
            bit_idx <= bit_idx + 1'b1;
            if (bit_idx == 3'd7) state <= RX_STOP;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        RX_STOP: begin
          if (cnt == CW'(CLKS_PER_BIT - 1)) begin
            cnt   <= '0;
            state <= RX_IDLE;
            if (rx_s) begin
              data  <= shreg;
              valid <= 1'b1;
            end else begin
              frame_err <= 1'b1;
            end
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        default: state <= RX_IDLE;
      endcase
    end
  end

endmodule
