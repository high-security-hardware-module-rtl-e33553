// tb_key_buffer: writes keys byte by byte and checks that each byte lands in
// its buffer KInput(i), that key_valid rises only after the last byte, that
// extra bytes are ignored while full, and that clear empties the buffers.
module tb_key_buffer;
  localparam int unsigned KB = 8;

  logic clk = 0, rst_n = 0, bv = 0, clear = 0;
  logic [7:0] bd = '0;
  logic [7:0] kinput [KB];
  logic key_valid;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  key_buffer #(.KEY_BYTES(KB)) dut (.clk, .rst_n, .byte_valid(bv), .byte_data(bd), .clear,
                                    .kinput, .key_valid);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic put(input logic [7:0] b);
    @(negedge clk); bv = 1; bd = b;
    @(negedge clk); bv = 0; bd = 8'hEE;
    repeat ($urandom_range(0, 3)) @(negedge clk);
  endtask

  initial begin
    logic [7:0] key [KB];
    logic [63:0] fig_key;
    fig_key = "MAMCAQA=";   // the eight bytes shown on the key-input path
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (key_valid) begin failures++; $display("key_valid after reset"); end
    for (int r = 0; r < 20; r++) begin
      for (int i = 0; i < KB; i++) key[i] = (r == 0) ? fig_key[63 - i*8 -: 8] : 8'($urandom);
      for (int i = 0; i < KB; i++) begin
        checks++;
        if (key_valid) begin failures++; $display("round %0d: key_valid after %0d bytes", r, i); end
        put(key[i]);
      end
      checks++;
      if (!key_valid) begin failures++; $display("round %0d: key_valid missing", r); end
      put(~key[0]);   // ignored while full
      for (int i = 0; i < KB; i++) begin
        checks++;
        if (kinput[i] !== key[i]) begin
          failures++; $display("round %0d: KInput(%0d)=%h exp %h", r, i, kinput[i], key[i]);
        end
      end
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      checks += 2;
      if (key_valid) begin failures++; $display("round %0d: key_valid after clear", r); end
      if (kinput[0] !== 8'h00) begin failures++; $display("round %0d: buffer not cleared", r); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
