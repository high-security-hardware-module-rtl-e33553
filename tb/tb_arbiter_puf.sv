// tb_arbiter_puf: checks the arbiter PUF model against an independent
// reference: random and single-bit challenges, the three-cycle latency, that a
// challenge always gives the same answer, and that a second die (other seed)
// answers differently.
module tb_arbiter_puf;
  import puf_ref_pkg::*;

  localparam int unsigned CW = 16, RW = 16;
  localparam logic [31:0] SEED_A = 32'h4E45_5859, SEED_B = 32'h1234_5678;

  logic clk = 0, rst_n = 0, trig = 0;
  logic [CW-1:0] chal = '0;
  logic [RW-1:0] resp_a, resp_b;
  logic val_a, val_b;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  arbiter_puf #(.CHAL_W(CW), .RESP_W(RW), .DEVICE_SEED(SEED_A)) dut_a (
    .clk, .rst_n, .trigger(trig), .challenge(chal), .response(resp_a), .resp_valid(val_a));
  arbiter_puf #(.CHAL_W(CW), .RESP_W(RW), .DEVICE_SEED(SEED_B)) dut_b (
    .clk, .rst_n, .trigger(trig), .challenge(chal), .response(resp_b), .resp_valid(val_b));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic eval(input logic [CW-1:0] c, output logic [RW-1:0] ra, output logic [RW-1:0] rb);
    int lat;
    @(negedge clk); chal = c; trig = 1;
    @(negedge clk); trig = 0; chal = ~c;   // challenge must be latched
    trig = 1;                              // ignored while running
    @(negedge clk); trig = 0;
    lat = 2;
    while (!val_a) begin @(negedge clk); lat++; end
    checks++;
    if (lat != 3) begin failures++; $display("latency %0d, expected 3", lat); end
    ra = resp_a; rb = resp_b;
    @(negedge clk);
    checks++;
    if (val_a) begin failures++; $display("resp_valid longer than one cycle"); end
  endtask

  initial begin
    logic [RW-1:0] ra, rb, ra2, rb2, exp_a, exp_b;
    int differ, n;
    logic [RW-1:0] seen [$];
    differ = 0;
    n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 120; i++) begin
      logic [CW-1:0] c;
      c = (i < 17) ? ((i == 0) ? '0 : CW'(1) << (i - 1)) : CW'($urandom);
      eval(c, ra, rb);
      exp_a = RW'(puf_ref(SEED_A, 64'(c), CW, RW));
      exp_b = RW'(puf_ref(SEED_B, 64'(c), CW, RW));
      checks += 2;
      if (ra !== exp_a) begin failures++; $display("die A c=%h got %h exp %h", c, ra, exp_a); end
      if (rb !== exp_b) begin failures++; $display("die B c=%h got %h exp %h", c, rb, exp_b); end
      if (ra != rb) differ++;
      n++;
      if (i % 10 == 0) begin
        eval(c, ra2, rb2);
        checks++;
        if (ra2 !== ra || rb2 !== rb) begin failures++; $display("unstable response c=%h", c); end
      end
      if (!(ra inside {seen})) seen.push_back(ra);
    end
    // Two dies must differ on most challenges, and one die must give many
    // distinct responses.
    checks += 2;
    if (differ < n / 2) begin failures++; $display("dies differ on only %0d of %0d", differ, n); end
    if (seen.size() < 10) begin failures++; $display("only %0d distinct responses", seen.size()); end
    $display("distinct responses of die A: %0d of %0d challenges; dies differ on %0d", seen.size(), n, differ);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
