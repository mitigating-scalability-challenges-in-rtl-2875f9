// lutmu_tb_pkg: reference functions shared by the LUT-MU testbenches.
//
// ref_encode walks the MADDNESS decision tree one level at a time, the way
// the algorithm is defined (next ID = ID*2 + (value > split value), split
// value of level l, prefix p at node 2^l-1+p), independently of the
// parallel comparator structure of the RTL encoder. rand_signed draws a
// two's complement value of a given width.
package lutmu_tb_pkg;

  function automatic int ref_encode(input int vals[], input int splits[], input int levels);
    int id = 0;
    for (int l = 0; l < levels; l++) begin
      int node = (1 << l) - 1 + id;
      id = id * 2 + ((vals[l] > splits[node]) ? 1 : 0);
    end
    return id;
  endfunction

  function automatic int rand_signed(input int bits);
    int u = int'($urandom_range((1 << bits) - 1, 0));
    return (u >= (1 << (bits - 1))) ? u - (1 << bits) : u;
  endfunction

  // Sign-extends the low `bits` bits of v.
  function automatic int sext(input longint v, input int bits);
    longint m = (longint'(1) << bits) - 1;
    longint u = v & m;
    return int'((u >= (longint'(1) << (bits - 1))) ? u - (longint'(1) << bits) : u);
  endfunction

  // Behavioural model of one LUT-MU layer with random trained tables.
  // compute() returns the O sums bias[o] + sum_c lut[o][c][encode_c(x)] and
  // the O W-bit activations (number of thresholds reached) for one pruned
  // input vector x[i*C + c] (cluster i, codebook c).
  class lutmu_model;
    int C, I, O, W, G, NODES, T;
    int split [][];   // [c][node]
    int lut   [][][]; // [o][c][g]
    int bias  [];
    int thr   [][];   // [o][t]

    function new(int c, int i, int o, int w);
      C = c; I = i; O = o; W = w;
      G = 1 << I; NODES = G - 1; T = (1 << W) - 1;
      split = new[C];
      foreach (split[k]) split[k] = new[NODES];
      lut = new[O];
      foreach (lut[k]) begin
        lut[k] = new[C];
        foreach (lut[k][m]) lut[k][m] = new[G];
      end
      bias = new[O];
      thr = new[O];
      foreach (thr[k]) thr[k] = new[T];
    endfunction

    // Random tables. Thresholds are sorted and spread around the range the
    // sums of C random 2W-bit entries take, so activations cover 0..2^W-1.
    function void randomize_tables();
      int spread, r;
      r = 1;
      while ((r + 1) * (r + 1) <= C) r++;
      spread = (1 << (2*W - 1)) * r * 2;
      foreach (split[c, n]) split[c][n] = int'($urandom_range((1 << W) - 1, 0));
      foreach (lut[o, c, g]) lut[o][c][g] = rand_signed(2*W);
      foreach (bias[o]) bias[o] = rand_signed(2*W);
      foreach (thr[o]) begin
        int base;
        base = -spread / 2 + rand_signed(4);
        for (int t = 0; t < T; t++) thr[o][t] = base + (t * spread) / T;
      end
    endfunction

    function void compute(input int x [], output int sums [], output int act [], output int ids []);
      int vals [], spl [];
      vals = new[I]; spl = new[NODES];
      sums = new[O]; act = new[O]; ids = new[C];
      for (int c = 0; c < C; c++) begin
        for (int l = 0; l < I; l++) vals[l] = x[l*C + c];
        for (int n = 0; n < NODES; n++) spl[n] = split[c][n];
        ids[c] = ref_encode(vals, spl, I);
      end
      for (int o = 0; o < O; o++) begin
        sums[o] = bias[o];
        for (int c = 0; c < C; c++) sums[o] += lut[o][c][ids[c]];
        act[o] = 0;
        for (int t = 0; t < T; t++) if (sums[o] >= thr[o][t]) act[o]++;
      end
    endfunction
  endclass

endpackage
