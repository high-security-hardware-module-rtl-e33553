// response_memory: the list of registered PUF responses.
//
// Holds DEPTH entries, each a RESP_W-bit response with a valid bit. A lookup
// compares `lookup_resp` with every valid entry in parallel; one clock after
// `lookup_req` the result appears with a one-cycle `lookup_done` strobe:
// `match` is 1 when some valid entry equals the response, and `match_idx`
// names the lowest such entry. `match` and `match_idx` hold until the next
// lookup.
//
// Entries are written through the enrolment port (`enroll_we`, with
// `enroll_valid` = 0 revoking an entry). After reset entry 0 holds INIT_RESP
// and the others are empty. The default INIT_RESP is the response that the
// published uniqueness test lists as authenticated.
//
// That a response is accepted only if it is found in the list follows the
// published design. The size, the parallel compare and the enrolment port
// are this design's own choices: the publication does not say how responses
// are registered.
module response_memory #(
  parameter int unsigned DEPTH     = 16,
  parameter int unsigned RESP_W    = hsm_pkg::RESP_W,
  parameter logic [RESP_W-1:0] INIT_RESP = RESP_W'(16'b1111_1111_1101_1110)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     enroll_we,
  input  logic [$clog2(DEPTH)-1:0] enroll_idx,
  input  logic [RESP_W-1:0]        enroll_resp,
  input  logic                     enroll_valid,
  input  logic                     lookup_req,
  input  logic [RESP_W-1:0]        lookup_resp,
  output logic                     lookup_done,
  output logic                     match,
  output logic [$clog2(DEPTH)-1:0] match_idx
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [RESP_W-1:0] entry [DEPTH];
  logic [DEPTH-1:0]  used;
  logic              hit;
  logic [AW-1:0]     hit_idx;

  always_comb begin
    hit     = 1'b0;
    hit_idx = '0;
    for (int i = DEPTH - 1; i >= 0; i--) begin
      if (used[i] && entry[i] == lookup_resp) begin
        hit     = 1'b1;
        hit_idx = AW'(i);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < DEPTH; i++) entry[i] <= '0;
      entry[0]    <= INIT_RESP;
      used        <= DEPTH'(1);
      lookup_done <= 1'b0;
      match       <= 1'b0;
      match_idx   <= '0;
    end else begin
      lookup_done <= lookup_req;
      if (lookup_req) begin
        match     <= hit;
        match_idx <= hit_idx;
      end
      if (enroll_we) begin
        entry[enroll_idx] <= enroll_resp;
        used[enroll_idx]  <= enroll_valid;
      end
    end
  end

endmodule
