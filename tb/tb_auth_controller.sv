// tb_auth_controller: plays the key buffer, PUF, response list and UART
// transmitter around the controller. Checks the order trigger -> lookup ->
// report, the LED colours, that the signal byte 8'h01 is sent only on
// success and only when the transmitter is free, and that the key buffers
// are cleared once per authentication.
module tb_auth_controller;
  logic clk = 0, rst_n = 0;
  logic key_valid = 0, puf_valid = 0, lookup_done = 0, match = 0, tx_busy = 0;
  logic key_clear, puf_trigger, lookup_req, tx_start, led_green, led_red, auth_done;
  logic [7:0] tx_data;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  auth_controller dut (.clk, .rst_n, .key_valid, .key_clear, .puf_trigger, .puf_valid,
    .lookup_req, .lookup_done, .match, .tx_start, .tx_data, .tx_busy, .led_green, .led_red,
    .auth_done);

  int n_trig = 0, n_req = 0, n_tx = 0, n_clr = 0, n_done = 0;
  int t_trig, t_req;
  int cyc = 0;
  logic want_match = 0;

  // Behaviour of the blocks around the controller.
  always @(posedge clk) begin
    cyc++;
    if (puf_trigger) begin n_trig++; t_trig = cyc; end
    if (lookup_req)  begin n_req++;  t_req = cyc; end
    if (tx_start)    begin
      n_tx++;
      checks++;
      if (tx_busy || tx_data !== 8'h01) begin failures++; $display("bad tx_start"); end
    end
    if (key_clear) begin n_clr++; key_valid <= 0; end
    if (auth_done) n_done++;
    puf_valid   <= 0;
    lookup_done <= lookup_req;
    match       <= lookup_req ? want_match : match;
  end
  // PUF answers two cycles after the trigger.
  always @(posedge clk) if (puf_trigger) begin
    @(posedge clk); puf_valid <= 1;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    checks++;
    if (led_green || led_red || n_trig != 0) begin failures++; $display("activity without a key"); end
    for (int k = 0; k < 40; k++) begin
      int tx0, tr0, rq0, cl0, dn0;
      logic m;
      m = (k % 3 != 1);
      want_match = m;
      tx0 = n_tx; tr0 = n_trig; rq0 = n_req; cl0 = n_clr; dn0 = n_done;
      if (k % 5 == 4) tx_busy = 1;          // transmitter still busy
      @(negedge clk); key_valid = 1;
      repeat (12) @(negedge clk);
      if (tx_busy) begin
        checks++;
        if (n_tx != tx0 || n_clr != cl0 && m) begin failures++; $display("sent while busy"); end
        tx_busy = 0;
        repeat (4) @(negedge clk);
      end
      checks += 6;
      if (n_trig != tr0 + 1) begin failures++; $display("k=%0d: %0d triggers", k, n_trig - tr0); end
      if (n_req != rq0 + 1)  begin failures++; $display("k=%0d: %0d lookups", k, n_req - rq0); end
      if (t_req <= t_trig)   begin failures++; $display("k=%0d: lookup before PUF", k); end
      if (n_tx != tx0 + (m ? 1 : 0)) begin failures++; $display("k=%0d: %0d signal bytes", k, n_tx - tx0); end
      if (n_clr != cl0 + 1 || n_done != dn0 + 1) begin failures++; $display("k=%0d: clear/done", k); end
      if (led_green !== m || led_red !== !m) begin
        failures++; $display("k=%0d: leds g=%b r=%b, match=%b", k, led_green, led_red, m);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
