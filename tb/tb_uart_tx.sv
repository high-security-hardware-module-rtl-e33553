// tb_uart_tx: sends bytes and samples the line in the middle of each bit,
// checking start bit, data LSB first, stop bit, the busy time of exactly
// 10 bit times and the idle-high line.
module tb_uart_tx;
  localparam int unsigned CPB = 8;

  logic clk = 0, rst_n = 0, start = 0, tx, busy;
  logic [7:0] data = '0;
  int checks = 0, failures = 0;
  int busy_cnt = 0;

  always @(posedge clk) if (busy) busy_cnt++;

  always #5 clk = ~clk;

  uart_tx #(.CLKS_PER_BIT(CPB)) dut (.clk, .rst_n, .start, .data, .tx, .busy);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    checks++;
    if (tx !== 1'b1 || busy) begin failures++; $display("line not idle after reset"); end
    for (int k = 0; k < 30; k++) begin
      logic [7:0] b;
      logic [9:0] got;
      b = (k == 0) ? 8'h01 : 8'($urandom);
      @(negedge clk); data = b; start = 1; busy_cnt = 0;
      @(negedge clk); start = 0; data = ~b;
      // The start bit began at the edge just passed; sample mid-bit.
      repeat (CPB / 2 - 1) @(negedge clk);
      for (int i = 0; i < 10; i++) begin
        got[i] = tx;
        repeat (CPB) @(negedge clk);
      end
      checks += 3;
      if (got[0] !== 1'b0) begin failures++; $display("byte %0d: no start bit", k); end
      if (got[8:1] !== b) begin failures++; $display("byte %0d: got %h exp %h", k, got[8:1], b); end
      if (got[9] !== 1'b1) begin failures++; $display("byte %0d: no stop bit", k); end
      while (busy) @(negedge clk);
      checks++;
      if (busy_cnt != 10 * CPB) begin
        failures++; $display("byte %0d: busy for %0d cycles, expected %0d", k, busy_cnt, 10 * CPB);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
