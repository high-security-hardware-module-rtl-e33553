// arbiter_puf: arbiter physical unclonable function with RESP_W response
// bits and a CHAL_W-bit challenge.
//
// RESP_W delay lines (inst_mux_path[l].inst_delay_line, see puf_delay_line)
// share one challenge and one launch signal. `trigger` latches the challenge
// and raises `launch`; the edge races down both paths of every line and each
// line's arbiter flip-flop records which path came first. Two clocks later
// the arbiter outputs are copied into `response`, `resp_valid` pulses for one
// cycle and `launch` falls again (a falling edge does not clock the
// arbiters). A trigger while an evaluation is running is ignored.
//
// Timing: the clock edge that samples `trigger` launches the race, the second
// edge after it captures the arbiters, so `resp_valid` is high in the third
// cycle after the one in which `trigger` is high and the race has two clock
// periods to settle. At the defaults it takes at most
// CHAL_W * (BASE_PS + SPREAD_PS) = 8.5 ns; an assertion checks this bound
// against 2 * CLK_PERIOD_PS (100 MHz clock assumed).
//
// In simulation the route delays, drawn from DEVICE_SEED, make each seed a
// different die whose answers never change (no noise, no metastability). On
// an FPGA the delays are the chip's own; as with any arbiter PUF the lines
// must then be placed and routed symmetrically by hand, and the tool must be
// kept from merging the two paths of a line, which carry the same logical
// signal: the nets carry keep/dont_touch attributes for that. A generic
// synthesis that ignores them (yosys, for one) reduces each line to a single
// flip-flop, so its area figures for this block are not those of the PUF.
//
// The multiplexer chains with one D flip-flop per line follow the published
// architecture, which uses 16-bit challenges and responses. The delay values,
// the two-cycle capture, the tie rule and which path drives D are this
// design's own choices.
module arbiter_puf #(
  parameter int unsigned CHAL_W        = hsm_pkg::CHAL_W,
  parameter int unsigned RESP_W        = hsm_pkg::RESP_W,
  parameter logic [31:0] DEVICE_SEED   = 32'h4E45_5859,
  parameter int unsigned BASE_PS       = 500,
  parameter int unsigned SPREAD_PS     = 31,
  parameter int unsigned CLK_PERIOD_PS = 10_000
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              trigger,
  input  logic [CHAL_W-1:0] challenge,
  output logic [RESP_W-1:0] response,
  output logic              resp_valid
);

  logic [CHAL_W-1:0] chal_q;
  logic              launch;
  logic              running;
  logic [RESP_W-1:0] arb;

  for (genvar l = 0; l < RESP_W; l++) begin : inst_mux_path
    puf_delay_line #(
      .CHAL_W(CHAL_W), .DEVICE_SEED(DEVICE_SEED), .LINE(l), .BASE_PS(BASE_PS), .SPREAD_PS(SPREAD_PS)
    ) inst_delay_line (
      .launch, .challenge(chal_q), .arb_out(arb[l]));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      chal_q     <= '0;
      launch     <= 1'b0;
      running    <= 1'b0;
      response   <= '0;
      resp_valid <= 1'b0;
    end else begin
      resp_valid <= 1'b0;
      if (trigger && !running && !launch) begin
        chal_q  <= challenge;
        launch  <= 1'b1;
      end else if (launch && !running) begin
        running <= 1'b1;           // race in flight
      end else if (running) begin
        response   <= arb;         // capture edge
        resp_valid <= 1'b1;
        launch     <= 1'b0;
        running    <= 1'b0;
      end
    end
  end

  // The slowest possible race must end before the capture edge.
  initial assert (CHAL_W * (BASE_PS + SPREAD_PS) + 1 < 2 * CLK_PERIOD_PS)
    else $error("arbiter_puf: race longer than the capture window");

endmodule
