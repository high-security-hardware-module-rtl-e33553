// puf_mux_pair: one stage of an arbiter-PUF delay line.
//
// Two 2:1 multiplexers (inst_mux_1 for the upper path, inst_mux_2 for the
// lower one). With the challenge bit `c` at 0 each path passes straight
// through; at 1 the paths swap. On an FPGA the stage's behaviour is set by
// its placement and routing delays; for simulation each of the four routes
// (upper straight, lower straight, upper crossed, lower crossed) carries its
// own delay, given in picoseconds by the parameters. Synthesis ignores the
// delays; the keep/dont_touch attributes ask an FPGA tool to keep both
// multiplexers although their inputs carry the same logical signal.
module puf_mux_pair #(
  parameter int unsigned D_US_PS = 500,   // upper out <- upper in (c = 0)
  parameter int unsigned D_LS_PS = 500,   // lower out <- lower in (c = 0)
  parameter int unsigned D_UC_PS = 500,   // upper out <- lower in (c = 1)
  parameter int unsigned D_LC_PS = 500    // lower out <- upper in (c = 1)
) (
  input  logic c,
  input  logic up_in,
  input  logic lo_in,
  (* keep = "true", dont_touch = "true" *) output logic up_out,
  (* keep = "true", dont_touch = "true" *) output logic lo_out
);
  timeunit 1ps;
  timeprecision 100fs;

  // keep/dont_touch: logically both paths carry the same signal, so without
  // them synthesis would merge the paths and remove the race.
  (* keep = "true", dont_touch = "true" *) logic up_s, lo_s, up_x, lo_x;

  // Route delays (simulation only).
  assign #(D_US_PS) up_s = up_in;
  assign #(D_LS_PS) lo_s = lo_in;
  assign #(D_UC_PS) up_x = lo_in;
  assign #(D_LC_PS) lo_x = up_in;

  // inst_mux_1 and inst_mux_2.
  assign up_out = c ? up_x : up_s;
  assign lo_out = c ? lo_x : lo_s;

endmodule
