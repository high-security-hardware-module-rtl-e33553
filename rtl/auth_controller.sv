// auth_controller: sequencer of one PUF authentication.
//
// Flow (states of hsm_pkg::auth_state_e):
//   IDLE      wait until the key buffers are full (`key_valid`)
//   LAUNCH    one-cycle `puf_trigger`: the folded key is the challenge
//   WAIT_PUF  wait for the PUF's `puf_valid`
//   LOOKUP    one-cycle `lookup_req`, wait for `lookup_done`
//   REPORT    light green (`match`) or red (no match); on success queue the
//             signal byte AUTH_OK_BYTE for the SBC with `tx_start`, waiting
//             while the transmitter is busy
//   CLEAR     empty the key buffers (`key_clear`) and return to IDLE
// `auth_done` pulses once per authentication, in REPORT when the result is
// taken. The LEDs keep the last result until the next one; both are off after
// reset. Nothing is sent to the SBC on failure. `tx_data` is the constant
// AUTH_OK_BYTE; it is a port so that the transmitter's byte input has a
// defined source.
//
// Green for success, red for failure and a UART signal to the SBC on success
// follow the published design. Starting as soon as the key is complete, the
// byte value and the LED hold behaviour are this design's own choices.
module auth_controller #(
  parameter logic [7:0] AUTH_OK_BYTE = 8'h01
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       key_valid,
  output logic       key_clear,
  output logic       puf_trigger,
  input  logic       puf_valid,
  output logic       lookup_req,
  input  logic       lookup_done,
  input  logic       match,
  output logic       tx_start,
  output logic [7:0] tx_data,
  input  logic       tx_busy,
  output logic       led_green,
  output logic       led_red,
  output logic       auth_done
);

  import hsm_pkg::*;

  auth_state_e state, state_n;
  logic        result_q;   // match captured at lookup_done

  always_comb begin
    state_n     = state;
    key_clear   = 1'b0;
    puf_trigger = 1'b0;
    lookup_req  = 1'b0;
    tx_start    = 1'b0;
    auth_done   = 1'b0;
    unique case (state)
      ST_IDLE:     if (key_valid) state_n = ST_LAUNCH;
      ST_LAUNCH: begin
        puf_trigger = 1'b1;
        state_n     = ST_WAIT_PUF;
      end
      ST_WAIT_PUF: if (puf_valid) begin
        lookup_req = 1'b1;
        state_n    = ST_LOOKUP;
      end
      ST_LOOKUP:   if (lookup_done) state_n = ST_REPORT;
      ST_REPORT: begin
        if (!result_q) begin
          auth_done = 1'b1;
          state_n   = ST_CLEAR;
        end else if (!tx_busy) begin
          tx_start  = 1'b1;
          auth_done = 1'b1;
          state_n   = ST_CLEAR;
        end
      end
      ST_CLEAR: begin
        key_clear = 1'b1;
        state_n   = ST_IDLE;
      end
      default: state_n = ST_IDLE;
    endcase
  end

  assign tx_data = AUTH_OK_BYTE;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= ST_IDLE;
      result_q  <= 1'b0;
      led_green <= 1'b0;
      led_red   <= 1'b0;
    end else begin
      state <= state_n;
      if (state == ST_LOOKUP && lookup_done) result_q <= match;
      if (auth_done) begin
        led_green <= result_q;
        led_red   <= !result_q;
      end
    end
  end

  // The two LEDs never light together.
  a_leds_exclusive: assert property (@(posedge clk) disable iff (!rst_n) !(led_green && led_red))
    else $error("auth_controller: both LEDs lit");

endmodule
