// rsv_ref_pkg - reference model of the reservoir arithmetic for the
// testbenches, written with plain integers and independent of the RTL.
//
// Values are Fix_18_12 held as int (value * 4096). lfsr_next is the
// x^6+x^5+1 Fibonacci register; mem_step is one leaky integrate-and-fire
// time step with saturation, truncating leak and refractory hold.
package rsv_ref_pkg;

  localparam int FMAX = 131071;
  localparam int FMIN = -131072;

  function automatic int sat(input longint v);
    if (v > FMAX) return FMAX;
    if (v < FMIN) return FMIN;
    return int'(v);
  endfunction

  function automatic int lfsr_next(input int s);
    int fb;
    fb = ((s >> 5) ^ (s >> 4)) & 1;
    return ((s << 1) & 63) | fb;
  endfunction

  // low 4 bits of the LFSR as a signed Fix_4_3 value
  function automatic int rnd_of(input int s);
    int r;
    r = s & 15;
    return (r >= 8) ? r - 16 : r;
  endfunction

  // floor division by 4096 of a signed product
  function automatic longint floor4096(input longint p);
    if (p >= 0) return p / 4096;
    return -((-p + 4095) / 4096);
  endfunction

  // One membrane step. vm, refr updated in place; returns the spike.
  function automatic bit mem_step(inout int vm, inout int refr, input int vs,
                                  input int vth, input int vreset,
                                  input int k, input int refract_steps);
    longint leak;
    int     vn;
    if (refr > 0) begin
      vm   = vreset;
      refr = refr - 1;
      return 1'b0;
    end
    leak = floor4096(longint'(vm - vreset) * longint'(k));
    vn   = sat(longint'(vm) + longint'(vs) + leak);
    if (vn >= vth) begin
      vm   = vreset;
      refr = refract_steps;
      return 1'b1;
    end
    vm = vn;
    return 1'b0;
  endfunction

endpackage
