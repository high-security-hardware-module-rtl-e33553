// tb_hsm_top: end-to-end test of the PUF authenticator at its default sizes
// (115200 baud at 100 MHz, 8 key bytes, 16-bit challenge and response).
//
// Plays the host GUI on the UART input and the SBC on the UART output:
//  1. sends the eleven 16-bit keys of the published uniqueness test (two
//     bytes, then six zero bytes) twice, checks each displayed response
//     against the reference PUF model, that both runs agree, and that all
//     are rejected (red) with nothing sent to the SBC; prints the uniqueness
//     figure (distinct responses / 22) the way the publication computes it;
//  2. registers the response of one key, sends it again: green LED exactly
//     8 cycles after the last byte is received, and the signal byte 8'h01
//     arrives on the SBC line;
//  3. sends the eight-byte key "MAMCAQA=" and checks the XOR folding;
//  4. revokes the entry: the same key is rejected again;
//  5. sends a byte with a low stop bit: it is flagged and dropped, and the
//     key that follows is still received correctly.
// Each mechanism (reject, accept, signal byte, enrolment, revocation,
// framing error) must happen at least once.
module tb_hsm_top;
  import puf_ref_pkg::*;

  localparam int unsigned CPB = 868;             // hsm_top default
  localparam logic [31:0] SEED = 32'h4E45_5859;  // hsm_top default

  logic clk = 0, rst_n = 0, rx = 1;
  logic tx, led_green, led_red, frame_err;
  logic [15:0] resp_leds;
  logic enroll_we = 0, enroll_valid = 0;
  logic [3:0] enroll_idx = '0;
  logic [15:0] enroll_resp = '0;
  int checks = 0, failures = 0;
  int n_reject = 0, n_accept = 0, n_signal = 0, n_enrol = 0, n_revoke = 0, n_ferr = 0;
  logic [7:0] sbc_bytes [$];

  always #5 clk = ~clk;   // 100 MHz

  hsm_top dut (.clk, .rst_n, .uart_rx_i(rx), .uart_tx_o(tx), .led_green, .led_red, .resp_leds,
               .enroll_we, .enroll_idx, .enroll_resp, .enroll_valid, .frame_err);

  initial begin
    repeat (5_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && frame_err) n_ferr++;

  // SBC side: 8N1 receiver sampling mid-bit.
  initial begin
    forever begin
      logic [7:0] b;
      @(negedge tx);
      repeat (CPB / 2) @(posedge clk);
      for (int i = 0; i < 8; i++) begin
        repeat (CPB) @(posedge clk);
        b[i] = tx;
      end
      repeat (CPB) @(posedge clk);
      if (tx) begin sbc_bytes.push_back(b); n_signal++; end
    end
  end

  task automatic send_byte(input logic [7:0] b, input logic stop = 1'b1);
    logic [9:0] f;
    f = {stop, b, 1'b0};
    for (int i = 0; i < 10; i++) begin
      rx = f[i];
      repeat (CPB) @(negedge clk);
    end
    rx = 1;
  endtask

  // Sends a key and waits until the result and any signal byte to the SBC
  // (one 10-bit frame) are complete.
  task automatic send_key(input logic [7:0] k [8]);
    for (int i = 0; i < 8; i++) send_byte(k[i]);
    repeat (12 * CPB) @(negedge clk);
  endtask

  // Latency monitor: receiver strobe of a byte that completes a key, to the
  // controller's report.
  int strobe_t = 0, report_t = 0, cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (dut.rx_valid) strobe_t = cyc;
    if (dut.auth_done) report_t = cyc + 1;   // LEDs register on this edge
  end

  function automatic void key16(input logic [15:0] v, output logic [7:0] k [8]);
    k[0] = v[15:8]; k[1] = v[7:0];
    for (int i = 2; i < 8; i++) k[i] = 8'h00;
  endfunction

  task automatic expect_result(input string what, input logic [15:0] exp_resp, input logic exp_ok,
                               input int sig0);
    checks += 3;
    if (resp_leds !== exp_resp) begin
      failures++; $display("%s: response %b, reference %b", what, resp_leds, exp_resp);
    end
    if (led_green !== exp_ok || led_red !== !exp_ok) begin
      failures++; $display("%s: green=%b red=%b, expected ok=%b", what, led_green, led_red, exp_ok);
    end
    if (n_signal != sig0 + (exp_ok ? 1 : 0)) begin
      failures++; $display("%s: %0d signal bytes to the SBC", what, n_signal - sig0);
    end
    if (exp_ok) n_accept++; else n_reject++;
  endtask

  logic [15:0] table_keys [11] = '{16'b0000000000000000, 16'b1000000000000000, 16'b0010000000000000,
                                   16'b0001000000000000, 16'b0100000000000000, 16'b0000100000000000,
                                   16'b0000010000000000, 16'b0000001000000000, 16'b0000000100000000,
                                   16'b0000000010000000, 16'b0000000000000001};

  initial begin
    logic [7:0] k [8];
    logic [15:0] r, r0;
    logic [15:0] exp1 [11];
    logic [15:0] distinct [$];
    int sig0, n_distinct;
    n_distinct = 0;
    repeat (5) @(negedge clk);
    rst_n = 1;
    repeat (CPB) @(negedge clk);
    checks++;
    if (led_green || led_red || tx !== 1'b1) begin failures++; $display("outputs active after reset"); end

    // 1. The published key set, two experiments.
    for (int e = 0; e < 2; e++) begin
      for (int i = 0; i < 11; i++) begin
        key16(table_keys[i], k);
        sig0 = n_signal;
        send_key(k);
        r = 16'(puf_ref(SEED, 64'(table_keys[i]), 16, 16));
        expect_result($sformatf("exp%0d key %b", e + 1, table_keys[i]), r,
                      (r == 16'b1111111111011110), sig0);
        if (e == 0) $display("key %b -> response %b", table_keys[i], resp_leds);
        // Stability: the second experiment repeats the first.
        if (e == 0) exp1[i] = resp_leds;
        else begin
          checks++;
          if (resp_leds !== exp1[i]) begin failures++; $display("key %b: unstable response", table_keys[i]); end
        end
        if (!(resp_leds inside {distinct})) distinct.push_back(resp_leds);
      end
      n_distinct += distinct.size();
      distinct.delete();
    end
    // Uniqueness as published: distinct responses of each experiment, summed
    // over both, divided by the 22 trials (the published table gives 16/22).
    $display("uniqueness: %0d distinct responses in 22 trials (%0d%%)", n_distinct,
             n_distinct * 100 / 22);

    // 2. Register the response of the second key and present it again.
    key16(table_keys[1], k);
    r0 = 16'(puf_ref(SEED, 64'(table_keys[1]), 16, 16));
    @(negedge clk); enroll_we = 1; enroll_idx = 4'd5; enroll_resp = r0; enroll_valid = 1;
    @(negedge clk); enroll_we = 0;
    n_enrol++;
    sig0 = n_signal;
    sbc_bytes.delete();
    send_key(k);
    expect_result("registered key", r0, 1'b1, sig0);
    checks += 2;
    if (report_t - strobe_t != 8) begin
      failures++; $display("result %0d cycles after the last byte, expected 8", report_t - strobe_t);
    end
    if (sbc_bytes.size() != 1 || sbc_bytes[0] !== 8'h01) begin
      failures++; $display("SBC did not receive exactly one 8'h01");
    end

    // 3. Full eight-byte key: challenge is the XOR of its four 16-bit words.
    begin
      logic [63:0] fk;
      logic [15:0] ch;
      fk = "MAMCAQA=";
      for (int i = 0; i < 8; i++) k[i] = fk[63 - 8*i -: 8];
      ch = fk[63:48] ^ fk[47:32] ^ fk[31:16] ^ fk[15:0];
      sig0 = n_signal;
      send_key(k);
      r = 16'(puf_ref(SEED, 64'(ch), 16, 16));
      expect_result("key MAMCAQA=", r, (r == r0) || (r == 16'b1111111111011110), sig0);
    end

    // 4. Revoke the registered response: the key is rejected again.
    @(negedge clk); enroll_we = 1; enroll_idx = 4'd5; enroll_valid = 0;
    @(negedge clk); enroll_we = 0;
    n_revoke++;
    key16(table_keys[1], k);
    sig0 = n_signal;
    send_key(k);
    expect_result("revoked key", r0, 1'b0, sig0);

    // 5. Framing error, then a valid key.
    begin
      int f0;
      f0 = n_ferr;
      send_byte(8'h55, 1'b0);
      rx = 1;
      repeat (2 * CPB) @(negedge clk);
      checks++;
      if (n_ferr != f0 + 1) begin failures++; $display("framing error not flagged"); end
      key16(table_keys[10], k);
      sig0 = n_signal;
      send_key(k);
      r = 16'(puf_ref(SEED, 64'(table_keys[10]), 16, 16));
      expect_result("key after framing error", r, (r == 16'b1111111111011110), sig0);
    end

    // Every mechanism must have occurred.
    checks += 6;
    if (n_reject == 0) begin failures++; $display("no rejection"); end
    if (n_accept == 0) begin failures++; $display("no acceptance"); end
    if (n_signal == 0) begin failures++; $display("no signal byte"); end
    if (n_enrol  == 0) begin failures++; $display("no enrolment"); end
    if (n_revoke == 0) begin failures++; $display("no revocation"); end
    if (n_ferr   == 0) begin failures++; $display("no framing error"); end
    $display("rejected=%0d accepted=%0d signal_bytes=%0d enrolments=%0d revocations=%0d framing_errors=%0d",
             n_reject, n_accept, n_signal, n_enrol, n_revoke, n_ferr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
