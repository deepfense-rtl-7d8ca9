// tb_ref_pkg: reference models shared by the testbenches.
//
// Parameters of the test networks are not stored: every weight, bias and
// input is a hash of its indices, so the stimulus loader and the reference
// model regenerate the same numbers and large networks need no tables.
// forward() is the dense-layer reference with the DNN kernel's fixed-point
// rules: full-precision accumulation of bias << FRAC plus products, floor
// shift by FRAC, saturation to 16 bits, optional ReLU.
package tb_ref_pkg;

  function automatic int unsigned fmix(int unsigned h);
    h = (h ^ (h >> 16)) * 32'h85ebca6b;
    h = (h ^ (h >> 13)) * 32'hc2b2ae35;
    return h ^ (h >> 16);
  endfunction

  function automatic int unsigned mix(int unsigned a, int unsigned b, int unsigned c, int unsigned d);
    int unsigned h = fmix(a + 32'h9e3779b9);
    h = fmix(h ^ (b * 32'h27d4eb2d));
    h = fmix(h ^ (c * 32'h165667b1));
    h = fmix(h ^ (d * 32'hd3a2646c));
    return h;
  endfunction

  // uniform integer in [-amp, amp]
  function automatic shortint val(int seed, int l, int o, int i, int amp);
    return shortint'(int'(mix(seed, l, o, i) % (2 * amp + 1)) - amp);
  endfunction

  function automatic shortint narrow(longint acc, int frac, bit relu);
    longint s = acc >>> frac;
    if (s > 32767) s = 32767;
    if (s < -32768) s = -32768;
    if (relu && s < 0) s = 0;
    return shortint'(s);
  endfunction

  // network with seed: layer l has weights val(seed, l, o, i, wamp) and
  // biases val(seed, l + 100, o, 0, bamp)
  function automatic void forward(int seed, int nl, int dims [], bit relu [], int frac,
                                  int wamp, int bamp, shortint x [], ref shortint y []);
    shortint cur [] = x;
    shortint nxt [];
    for (int l = 0; l < nl; l++) begin
      nxt = new[dims[l+1]];
      for (int o = 0; o < dims[l+1]; o++) begin
        longint acc = longint'(val(seed, l + 100, o, 0, bamp)) <<< frac;
        for (int i = 0; i < dims[l]; i++)
          acc += longint'(val(seed, l, o, i, wamp)) * longint'(cur[i]);
        nxt[o] = narrow(acc, frac, relu[l]);
      end
      cur = nxt;
    end
    y = cur;
  endfunction

endpackage
