// hsm_pkg: types and constants shared by the PUF authenticator.
//
// The authenticator receives a key of KEY_BYTES bytes over UART, turns it
// into a CHAL_W-bit challenge for an arbiter PUF and checks the RESP_W-bit
// response against a list of registered responses. The sizes follow the
// eight key buffers of the key-input path and the 16-bit keys and responses
// of the published uniqueness test; the modules take them as parameters and
// these constants are their defaults.
package hsm_pkg;

  localparam int unsigned KEY_BYTES = 8;
  localparam int unsigned CHAL_W    = 16;
  localparam int unsigned RESP_W    = 16;

  typedef logic [7:0]        byte_t;
  typedef logic [CHAL_W-1:0] chal_t;
  typedef logic [RESP_W-1:0] resp_t;

  // Controller states of one authentication.
  typedef enum logic [2:0] {
    ST_IDLE,     // waiting for a full key
    ST_LAUNCH,   // pulse the PUF trigger
    ST_WAIT_PUF, // race in progress
    ST_LOOKUP,   // response being looked up
    ST_REPORT,   // LEDs updated, signal byte queued on success
    ST_CLEAR     // empty the key buffers
  } auth_state_e;

  // Route delay of the arbiter-PUF model, in picoseconds: route 0 upper
  // straight, 1 lower straight, 2 upper crossed, 3 lower crossed. The value
  // is base + (h mod (spread+1)), h an integer hash (xorshift-multiply) of
  // the die seed, the line and the stage.
  function automatic logic [31:0] puf_mix32(input logic [31:0] x);
    logic [31:0] h;
    h = x;
    h = h ^ (h >> 16);
    h = h * 32'h7FEB_352D;
    h = h ^ (h >> 15);
    h = h * 32'h846C_A68B;
    h = h ^ (h >> 16);
    return h;
  endfunction

  function automatic int unsigned puf_route_delay(input logic [31:0] seed, input int unsigned line,
                                                  input int unsigned stage, input int unsigned route,
                                                  input int unsigned base, input int unsigned spread);
    logic [31:0] h;
    h = puf_mix32(seed ^ puf_mix32(32'((line << 20) ^ (stage << 4) ^ route)));
    return base + int'(h % 32'(spread + 1));
  endfunction

endpackage
