// puf_delay_line: one response bit of the arbiter PUF.
//
// A chain of CHAL_W mux pairs (inst_mux_pair[i]) carries a launch edge along
// two paths whose routing depends on the challenge, and a D flip-flop
// (inst_dff) arbitrates: the upper path drives D, the lower path its clock,
// so the stored bit is 1 if the upper path won the race. The D input sees an
// extra half picosecond so that an exact tie in simulation resolves to 0.
//
// The route delays stand for this line's manufacturing variation: each is
// BASE_PS plus 0..SPREAD_PS drawn from a hash of DEVICE_SEED, LINE, the stage
// and the route (see hsm_pkg::puf_route_delay). On an FPGA they are replaced
// by the real ones and only the structure remains.
module puf_delay_line #(
  parameter int unsigned CHAL_W      = hsm_pkg::CHAL_W,
  parameter logic [31:0] DEVICE_SEED = 32'h4E45_5859,
  parameter int unsigned LINE        = 0,
  parameter int unsigned BASE_PS     = 500,
  parameter int unsigned SPREAD_PS   = 31
) (
  input  logic              launch,
  input  logic [CHAL_W-1:0] challenge,
  output logic              arb_out
);
  timeunit 1ps;
  timeprecision 100fs;

  (* keep = "true", dont_touch = "true" *) logic [CHAL_W:0] up, lo;
  (* keep = "true", dont_touch = "true" *) logic            up_d;

  assign up[0] = launch;
  assign lo[0] = launch;

  for (genvar s = 0; s < CHAL_W; s++) begin : inst_mux_pair
    puf_mux_pair #(
      .D_US_PS(hsm_pkg::puf_route_delay(DEVICE_SEED, LINE, s, 0, BASE_PS, SPREAD_PS)),
      .D_LS_PS(hsm_pkg::puf_route_delay(DEVICE_SEED, LINE, s, 1, BASE_PS, SPREAD_PS)),
      .D_UC_PS(hsm_pkg::puf_route_delay(DEVICE_SEED, LINE, s, 2, BASE_PS, SPREAD_PS)),
      .D_LC_PS(hsm_pkg::puf_route_delay(DEVICE_SEED, LINE, s, 3, BASE_PS, SPREAD_PS))
    ) u_pair (
      .c(challenge[s]), .up_in(up[s]), .lo_in(lo[s]), .up_out(up[s+1]), .lo_out(lo[s+1]));
  end

  assign #(0.5) up_d = up[CHAL_W];

  // inst_dff: the arbiter, clocked by the lower path.
  always_ff @(posedge lo[CHAL_W]) arb_out <= up_d;

endmodule
