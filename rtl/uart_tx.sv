// uart_tx: UART transmitter for the authentication signal to the SBC.
//
// Sends `data` as one 8N1 frame (start bit low, eight data bits LSB first,
// stop bit high), each bit CLKS_PER_BIT clocks long. `start` is accepted only
// while `busy` is low; `busy` rises the cycle after `start` and falls after
// the full stop bit, 10*CLKS_PER_BIT cycles later. The line idles high.
//
// The published design states only that a signal goes to the SBC over UART
// when authentication succeeds; the frame format and baud rate (115200 at a
// 100 MHz clock) are this design's own choices.
module uart_tx #(
  parameter int unsigned CLKS_PER_BIT = 868
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic [7:0] data,
  output logic       tx,
  output logic       busy
);

  localparam int unsigned CW = (CLKS_PER_BIT > 1) ? $clog2(CLKS_PER_BIT) : 1;

  logic [CW-1:0] cnt;
  logic [3:0]    bit_idx;   // 0 start, 1..8 data, 9 stop
  logic [9:0]    frame;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      tx      <= 1'b1;
      cnt     <= '0;
      bit_idx <= '0;
      frame   <= '1;
    end else if (!busy) begin
      tx <= 1'b1;
      if (start) begin
        busy    <= 1'b1;
        frame   <= {1'b1, data, 1'b0};
        tx      <= 1'b0;
        cnt     <= '0;
        bit_idx <= '0;
      end
    end else begin
      if (cnt == CW'(CLKS_PER_BIT - 1)) begin
        cnt <= '0;
        if (bit_idx == 4'd9) begin
          busy <= 1'b0;
          tx   <= 1'b1;
        end else begin
          bit_idx <= bit_idx + 1'b1;
          tx      <= frame[bit_idx + 1'b1];
        end
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end

  // A start request while a frame is on the line would be lost.
  a_no_start_when_busy: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !start)
    else $error("uart_tx: start while busy");

endmodule
