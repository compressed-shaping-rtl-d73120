// tb_cs_model_pkg: reference model of the hierarchical DM for the testbenches.
//
// Builds the LUT tables by explicitly sorting word lists (insertion sort on
// (key, value)) instead of the rank counting used by the RTL package, and
// walks the four layers of encoder and decoder bit by bit. Tables are
// indexed [layer 0..3][entry].
//
// The sorting rule (inputs by decreasing zeros, outputs by increasing
// energy) is the original one; the layer sizes, bit assignment, labelling
// and nearest-codeword decoding mirror this design's own choices. The
// package has no timing; it is called from the testbenches' initial blocks.
package tb_cs_model_pkg;

  localparam int EAW [4] = '{4, 4, 3, 1};   // encoder address widths
  localparam int EDW [4] = '{4, 5, 5, 4};   // encoder data widths

  function automatic int ones(int v);
    int c = 0;
    while (v != 0) begin
      c += v & 1;
      v = v >> 1;
    end
    return c;
  endfunction

  function automatic int energy(int v, bit qam16);
    if (qam16) return ones(v) * 9 + (4 - ones(v)) * 1;
    return (2 * (v & 3) + 1) ** 2 + (2 * ((v >> 2) & 3) + 1) ** 2;
  endfunction

  // all nbits-bit words, sorted by key then value
  function automatic void sorted(int nbits, bit by_energy, bit qam16, ref int lst[$]);
    int k_new, k_old, v, p;
    lst.delete();
    for (v = 0; v < (1 << nbits); v++) begin
      k_new = by_energy ? energy(v, qam16) : ones(v);
      p = lst.size();
      while (p > 0) begin
        k_old = by_energy ? energy(lst[p-1], qam16) : ones(lst[p-1]);
        if (k_old <= k_new) break;
        p--;
      end
      lst.insert(p, v);
    end
  endfunction

  typedef int tab_t [4][32];

  function automatic tab_t enc_tabs(bit qam16);
    tab_t t;
    int in_l[$], out_l[$];
    for (int l = 0; l < 4; l++) begin
      for (int i = 0; i < 32; i++) t[l][i] = 0;
      sorted(EAW[l], 1'b0, qam16, in_l);
      sorted(EDW[l], l == 0, qam16, out_l);
      for (int i = 0; i < (1 << EAW[l]); i++) t[l][in_l[i]] = out_l[i];
    end
    return t;
  endfunction

  function automatic tab_t dec_tabs(bit qam16);
    tab_t t, e;
    int in_l[$];
    int best, bd, d;
    e = enc_tabs(qam16);
    for (int l = 0; l < 4; l++) begin
      sorted(EAW[l], 1'b0, qam16, in_l);
      for (int w = 0; w < 32; w++) begin
        t[l][w] = 0;
        if (w < (1 << EDW[l])) begin
          best = in_l[0];
          bd   = 99;
          foreach (in_l[i]) begin
            d = ones(w ^ e[l][in_l[i]]);
            if (d < bd) begin
              bd = d;
              best = in_l[i];
            end
          end
          t[l][w] = best;
        end
      end
    end
    return t;
  endfunction

  function automatic logic [403:0] model_enc(logic [372:0] f, tab_t e);
    logic [403:0]     a;
    logic [3:0]       r3;
    logic [3:0][4:0]  l3;
    logic [19:0][4:0] l2;
    r3 = 4'(e[3][int'(f[372])]);
    for (int j = 0; j < 4; j++)   l3[j] = 5'(e[2][int'({r3[j], f[364 + 2*j +: 2]})]);
    for (int j = 0; j < 20; j++)  l2[j] = 5'(e[1][int'({l3[j/5][j%5], f[304 + 3*j +: 3]})]);
    for (int j = 0; j < 100; j++) a[4*j +: 4] = 4'(e[0][int'({l2[j/5][j%5], f[3*j +: 3]})]);
    a[400 +: 4] = 4'(e[0][int'(f[300 +: 4])]);
    return a;
  endfunction

  function automatic logic [372:0] model_dec(logic [403:0] a, tab_t d);
    logic [372:0] f;
    logic [100:0] r1;
    logic [19:0]  r2;
    logic [3:0]   r3;
    logic [4:0]   ad;
    int           v;
    for (int j = 0; j < 101; j++) begin
      v = d[0][int'(a[4*j +: 4])];
      if (j < 100) begin
        f[3*j +: 3] = 3'(v);
        r1[j] = v[3];
      end else begin
        f[300 +: 4] = 4'(v);
        r1[j] = 1'b0;
      end
    end
    for (int j = 0; j < 20; j++) begin
      for (int b = 0; b < 5; b++) ad[b] = r1[5*j + b];
      v = d[1][ad];
      f[304 + 3*j +: 3] = 3'(v);
      r2[j] = v[3];
    end
    for (int j = 0; j < 4; j++) begin
      for (int b = 0; b < 5; b++) ad[b] = r2[5*j + b];
      v = d[2][ad];
      f[364 + 2*j +: 2] = 2'(v);
      r3[j] = v[2];
    end
    f[372] = d[3][int'(r3)][0];
    return f;
  endfunction

  // one 2D-amplitude energy sum of an encoder output word
  function automatic int word_energy(logic [403:0] a, bit qam16);
    int e = 0;
    for (int j = 0; j < 101; j++) e += energy(int'(a[4*j +: 4]), qam16);
    return e;
  endfunction

endpackage
