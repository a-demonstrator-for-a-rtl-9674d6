// gnn_ref_pkg: integer reference model of the TrackGNN arithmetic, used by
// the testbenches to work out expected values independently of the RTL.
//
// Values are raw fixed-point integers with 12 fraction bits held in longint.
// A layer is y = wrap18(floor((b * 2^12 + sum w*x) / 2^12)), then ReLU on all
// but the last of the four layers. Messages are sums of edge embeddings
// wrapped to 21 bits. The parameter address map is the one of mlp4.
package gnn_ref_pkg;

  typedef longint lvec_t [$];

  // two's-complement wrap of v to w bits
  function automatic longint wrapw(longint v, int w);
    longint m, r;
    m = longint'(1) << w;
    r = v % m;
    if (r < 0) r += m;
    if (r >= m / 2) r -= m;
    return r;
  endfunction

  // floor(v / 2^s) for signed v
  function automatic longint floor_div(longint v, int s);
    longint d, q;
    d = longint'(1) << s;
    q = v / d;
    if ((v % d) != 0 && v < 0) q -= 1;
    return q;
  endfunction

  function automatic lvec_t ref_mlp(int in_dim, lvec_t prm, lvec_t x);
    lvec_t a, nxt;
    int    base, din;
    a    = x;
    base = 0;
    din  = in_dim;
    for (int l = 0; l < 4; l++) begin
      nxt = {};
      for (int o = 0; o < 8; o++) begin
        longint acc;
        acc = prm[base + 8*din + o] * 4096;
        for (int i = 0; i < din; i++) acc += prm[base + o*din + i] * a[i];
        acc = wrapw(floor_div(acc, 12), 18);
        if (l < 3 && acc < 0) acc = 0;
        nxt.push_back(acc);
      end
      base += 8*din + 8;
      din   = 8;
      a     = nxt;
    end
    return a;
  endfunction

  // a random raw value: mostly small (|v| < 2^11, i.e. below 0.5) so that
  // the network stays in range, sometimes anywhere in the signed w-bit range
  function automatic longint rnd_val(int w);
    if ($urandom_range(0, 9) == 0)
      return longint'($signed($urandom_range(0, (1 << w) - 1) - (1 << (w-1))));
    return longint'($signed($urandom_range(0, 4095))) - 2048;
  endfunction

endpackage
