// tb_response_memory: looks up the eleven responses of the published
// uniqueness test against the reset contents (only 1111111111011110 is
// registered) and checks the authenticated / rejected column; then enrols,
// revokes and looks up random responses, checking match, match_idx and the
// one-cycle lookup latency.
module tb_response_memory;
  localparam int unsigned D = 16, W = 16;

  logic clk = 0, rst_n = 0;
  logic we = 0, ev = 0, req = 0;
  logic [3:0] widx = '0;
  logic [W-1:0] wresp = '0, lresp = '0;
  logic done, match;
  logic [3:0] midx;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  response_memory #(.DEPTH(D), .RESP_W(W)) dut (
    .clk, .rst_n, .enroll_we(we), .enroll_idx(widx), .enroll_resp(wresp), .enroll_valid(ev),
    .lookup_req(req), .lookup_resp(lresp), .lookup_done(done), .match, .match_idx(midx));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic lookup(input logic [W-1:0] r, input logic exp_m, input logic [3:0] exp_i);
    @(negedge clk); req = 1; lresp = r;
    @(negedge clk); req = 0; lresp = ~r;
    checks++;
    if (!done) begin failures++; $display("lookup_done not one cycle after request"); end
    checks++;
    if (match !== exp_m || (exp_m && midx !== exp_i)) begin
      failures++; $display("lookup %b: match=%b idx=%0d exp %b/%0d", r, match, midx, exp_m, exp_i);
    end
    @(negedge clk);
    checks++;
    if (done) begin failures++; $display("lookup_done longer than one cycle"); end
  endtask

  task automatic enrol(input logic [3:0] i, input logic [W-1:0] r, input logic v);
    @(negedge clk); we = 1; widx = i; wresp = r; ev = v;
    @(negedge clk); we = 0;
  endtask

  // Responses and authentication results of the published test (V = 1).
  logic [W-1:0] t_resp [11] = '{16'b1111111111011110, 16'b1111111111011110, 16'b1111111111011110,
                                16'b1111111111011110, 16'b0111111111011110, 16'b1111111111111110,
                                16'b1111111111111010, 16'b1111111111011000, 16'b1111111011111100,
                                16'b1001111111111101, 16'b1001000010101001};
  logic t_auth [11] = '{1, 1, 1, 1, 0, 0, 0, 0, 0, 0, 0};

  initial begin
    logic [W-1:0] model [D];
    logic         used [D];
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int e = 0; e < 2; e++)          // both experiments of the test
      for (int k = 0; k < 11; k++) lookup(t_resp[k], t_auth[k], 4'd0);
    // Random enrolment and revocation against a list model.
    foreach (model[i]) begin model[i] = '0; used[i] = 0; end
    model[0] = 16'b1111111111011110; used[0] = 1;
    for (int n = 0; n < 300; n++) begin
      if ($urandom_range(0, 2) == 0) begin
        logic [3:0] i; logic [W-1:0] r; logic v;
        i = 4'($urandom); r = W'($urandom_range(0, 63)); v = ($urandom_range(0, 3) != 0);
        enrol(i, r, v);
        model[i] = r; used[i] = v;
      end else begin
        logic [W-1:0] r; logic m; logic [3:0] mi;
        r = W'($urandom_range(0, 63));
        if (n % 7 == 0) r = 16'b1111111111011110;
        m = 0; mi = 0;
        for (int i = D - 1; i >= 0; i--) if (used[i] && model[i] == r) begin m = 1; mi = 4'(i); end
        lookup(r, m, mi);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
