// tb_uart_rx: drives 8N1 frames into the receiver and checks every byte,
// the strobe timing (middle of the stop bit), a frame with a low stop bit
// (must give frame_err and no byte) and a short start glitch (ignored).
module tb_uart_rx;
  localparam int unsigned CPB = 16;

  logic clk = 0, rst_n = 0, rx = 1;
  logic [7:0] data;
  logic valid, frame_err;
  int checks = 0, failures = 0;
  int nvalid = 0, nerr = 0;
  logic [7:0] last;

  always #5 clk = ~clk;

  uart_rx #(.CLKS_PER_BIT(CPB)) dut (.clk, .rst_n, .rx, .data, .valid, .frame_err);

  always @(posedge clk) begin
    if (valid) begin nvalid++; last = data; end
    if (frame_err) nerr++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input logic [7:0] b, input logic stop);
    logic [9:0] f;
    f = {stop, b, 1'b0};
    for (int i = 0; i < 10; i++) begin
      rx = f[i];
      repeat (CPB) @(negedge clk);
    end
    rx = 1;
  endtask

  initial begin
    repeat (4) @(negedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    for (int k = 0; k < 40; k++) begin
      logic [7:0] b;
      int v0;
      b = (k == 0) ? 8'h4D : (k == 1) ? 8'h00 : (k == 2) ? 8'hFF : 8'($urandom);
      v0 = nvalid;
      send(b, 1'b1);
      repeat (3) @(negedge clk);
      checks += 2;
      if (nvalid != v0 + 1) begin failures++; $display("byte %0d: %0d strobes", k, nvalid - v0); end
      if (last !== b) begin failures++; $display("byte %0d: got %h exp %h", k, last, b); end
    end
    // Low stop bit: frame error, no byte.
    begin
      int v0, e0;
      v0 = nvalid; e0 = nerr;
      send(8'hA5, 1'b0);
      rx = 1;
      repeat (2 * CPB) @(negedge clk);
      checks += 2;
      if (nvalid != v0) begin failures++; $display("byte accepted despite low stop bit"); end
      if (nerr != e0 + 1) begin failures++; $display("no frame error flagged"); end
    end
    // Start glitch shorter than half a bit: ignored.
    begin
      int v0;
      v0 = nvalid;
      rx = 0; repeat (3) @(negedge clk); rx = 1;
      repeat (12 * CPB) @(negedge clk);
      checks++;
      if (nvalid != v0 || nerr != 1) begin failures++; $display("glitch produced a byte or error"); end
    end
    // Strobe position: the byte is delivered in the middle of the stop bit.
    begin
      int t0, t1;
      t0 = 0; t1 = 0;
      fork
        begin
          int c;
          c = 0;
          while (!valid) begin @(posedge clk); c++; end
          t1 = c;
        end
        send(8'h3C, 1'b1);
      join
      checks++;
      // Stop bit spans cycles 9*CPB..10*CPB; 2-flop sync plus mid-bit sampling.
      if (t1 < 9 * CPB + CPB / 2 || t1 > 9 * CPB + CPB / 2 + 4) begin
        failures++; $display("strobe at cycle %0d of the frame", t1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
