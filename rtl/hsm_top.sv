// hsm_top: FPGA PUF authenticator of the hardware security module.
//
// The host sends the RSA private key as KEY_BYTES bytes over `uart_rx_i`.
// uart_rx delivers the bytes, key_buffer stores them in KInput(0..7), and once
// the key is complete auth_controller folds it into a CHAL_W-bit challenge,
// fires the arbiter PUF and looks the response up in response_memory. A
// registered response lights `led_green` and sends one signal byte (8'h01)
// on `uart_tx_o` to the SBC that holds the encrypted files; an unknown one
// lights `led_red`. `resp_leds` shows the last PUF response so that an
// operator can register it through the enrolment port (`enroll_*`).
//
// Challenge: the KEY_BYTES*8 key bits, KInput(0) most significant, are cut
// into CHAL_W-bit words from the top (the last one padded with zeros) and
// XORed together. A 16-bit key sent as two bytes followed by zero bytes thus
// reaches the PUF unchanged.
//
// Timing after the stop bit of the last key byte: half a bit for the receiver
// to deliver it, then 1 cycle to flag the key, 1 to launch, 3 for the PUF,
// 1 for the lookup and 1 to report, so the LEDs change 8 cycles after the
// byte strobe and the signal frame starts one cycle later.
//
// The chain UART, eight byte buffers, arbiter PUF, response list, LEDs and
// UART signal follows the published design. The key folding, the response
// display, the enrolment port, the baud rate and all timing are this design's
// own choices.
module hsm_top #(
  parameter int unsigned CLKS_PER_BIT = 868,
  parameter int unsigned KEY_BYTES    = hsm_pkg::KEY_BYTES,
  parameter int unsigned CHAL_W       = hsm_pkg::CHAL_W,
  parameter int unsigned RESP_W       = hsm_pkg::RESP_W,
  parameter int unsigned MEM_DEPTH    = 16,
  parameter logic [31:0] DEVICE_SEED  = 32'h4E45_5859
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         uart_rx_i,
  output logic                         uart_tx_o,
  output logic                         led_green,
  output logic                         led_red,
  output logic [RESP_W-1:0]            resp_leds,
  input  logic                         enroll_we,
  input  logic [$clog2(MEM_DEPTH)-1:0] enroll_idx,
  input  logic [RESP_W-1:0]            enroll_resp,
  input  logic                         enroll_valid,
  output logic                         frame_err
);

  localparam int unsigned KBITS = KEY_BYTES * 8;
  localparam int unsigned NWORD = (KBITS + CHAL_W - 1) / CHAL_W;

  logic [7:0]        rx_data;
  logic              rx_valid;
  logic [7:0]        kinput [KEY_BYTES];
  logic              key_valid, key_clear;
  logic [CHAL_W-1:0] challenge;
  logic              puf_trigger, puf_valid;
  logic [RESP_W-1:0] puf_resp;
  logic              lookup_req, lookup_done, match;
  logic [$clog2(MEM_DEPTH)-1:0] match_idx;
  logic              tx_start, tx_busy;
  logic [7:0]        tx_data;
  logic              auth_done;

  uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_rx (
    .clk, .rst_n, .rx(uart_rx_i), .data(rx_data), .valid(rx_valid), .frame_err);

  key_buffer #(.KEY_BYTES(KEY_BYTES)) u_keybuf (
    .clk, .rst_n, .byte_valid(rx_valid), .byte_data(rx_data), .clear(key_clear),
    .kinput, .key_valid);

  // Fold the key into the challenge.
  always_comb begin
    logic [NWORD*CHAL_W-1:0] padded;
    padded = '0;
    for (int unsigned i = 0; i < KEY_BYTES; i++)
      padded[NWORD*CHAL_W - 1 - 8*i -: 8] = kinput[i];
    challenge = '0;
    for (int unsigned w = 0; w < NWORD; w++)
      challenge ^= padded[w*CHAL_W +: CHAL_W];
  end

  arbiter_puf #(.CHAL_W(CHAL_W), .RESP_W(RESP_W), .DEVICE_SEED(DEVICE_SEED)) u_puf (
    .clk, .rst_n, .trigger(puf_trigger), .challenge, .response(puf_resp), .resp_valid(puf_valid));

  response_memory #(.DEPTH(MEM_DEPTH), .RESP_W(RESP_W)) u_mem (
    .clk, .rst_n, .enroll_we, .enroll_idx, .enroll_resp, .enroll_valid,
    .lookup_req, .lookup_resp(puf_resp), .lookup_done, .match, .match_idx);

  auth_controller u_ctrl (
    .clk, .rst_n, .key_valid, .key_clear, .puf_trigger, .puf_valid,
    .lookup_req, .lookup_done, .match, .tx_start, .tx_data, .tx_busy,
    .led_green, .led_red, .auth_done);

  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_tx (
    .clk, .rst_n, .start(tx_start), .data(tx_data), .tx(uart_tx_o), .busy(tx_busy));

  assign resp_leds = puf_resp;

endmodule
