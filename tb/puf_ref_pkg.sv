// puf_ref_pkg: reference model of the arbiter PUF for the testbenches.
//
// Written apart from the design, from the model's definition: for every
// line the upper and lower arrival times are accumulated stage by stage
// (straight routes when the challenge bit is 0, crossed when it is 1, each
// route delay = base + hash(seed, line, stage, route) mod (spread+1)), and
// the bit is 1 when the upper path is strictly earlier.
package puf_ref_pkg;

  function automatic longint unsigned h32(longint unsigned v);
    longint unsigned x;
    x = v & 64'hFFFF_FFFF;
    x = (x ^ (x >> 16)) & 64'hFFFF_FFFF;
    x = (x * 64'h7FEB_352D) & 64'hFFFF_FFFF;
    x = (x ^ (x >> 15)) & 64'hFFFF_FFFF;
    x = (x * 64'h846C_A68B) & 64'hFFFF_FFFF;
    x = (x ^ (x >> 16)) & 64'hFFFF_FFFF;
    return x;
  endfunction

  function automatic int unsigned rdelay(int unsigned seed, int unsigned line, int unsigned stage,
                                         int unsigned route, int unsigned base, int unsigned spread);
    longint unsigned k;
    k = (longint'(line) << 20) ^ (longint'(stage) << 4) ^ longint'(route);
    return base + int'(h32(longint'(seed) ^ h32(k)) % (longint'(spread) + 1));
  endfunction

  function automatic logic [63:0] puf_ref(int unsigned seed, logic [63:0] chal, int unsigned chal_w,
                                          int unsigned resp_w, int unsigned base = 500,
                                          int unsigned spread = 31);
    logic [63:0] r;
    r = '0;
    for (int unsigned l = 0; l < resp_w; l++) begin
      int unsigned up, lo, tmp;
      up = 0; lo = 0;
      for (int unsigned s = 0; s < chal_w; s++) begin
        if (chal[s]) begin
          tmp = up;
          up  = lo  + rdelay(seed, l, s, 2, base, spread);
          lo  = tmp + rdelay(seed, l, s, 3, base, spread);
        end else begin
          up  = up + rdelay(seed, l, s, 0, base, spread);
          lo  = lo + rdelay(seed, l, s, 1, base, spread);
        end
      end
      r[l] = (up < lo);
    end
    return r;
  endfunction

endpackage
