// conv_ref_pkg: reference convolution for the testbenches.
//
// Computes one output feature OF[m][r][c] of a CONV layer from a word image
// of off-chip memory, with the same FP32 operation order as a CLP with TN
// input lanes: the bias is added on the first kernel position of the first
// input-map tile, and for every input-map tile and kernel position (i, j) the
// TN products are summed in a balanced binary tree (missing lanes are +0)
// and added to the running sum. The memory layout is the one in clp_pkg.
package conv_ref_pkg;
  import clp_pkg::*;
  import fp_ref_pkg::*;

  typedef logic [31:0] lanes_t [128];

  // Balanced-tree sum of the first np (a power of two) entries of v.
  function automatic logic [31:0] tree_sum(lanes_t v, int np);
    for (int w = np; w > 1; w = w / 2)
      for (int i = 0; i < w / 2; i++) v[i] = fadd(v[2*i], v[2*i+1]);
    return v[0];
  endfunction

  function automatic logic [31:0] ref_of(ref logic [31:0] mem[], input layer_desc_t l,
                                          input int tn, input int m, input int r, input int c);
    int np = 1;
    int ih = int'(l.s) * (int'(l.r) - 1) + int'(l.k);
    int iw = int'(l.s) * (int'(l.c) - 1) + int'(l.k);
    logic [31:0] acc = 32'd0;
    logic [31:0] sum, bv;
    int ba;
    lanes_t lanes;
    while (np < tn) np *= 2;
    for (int n0 = 0; n0 < int'(l.n); n0 += tn) begin
      for (int i = 0; i < int'(l.k); i++) begin
        for (int j = 0; j < int'(l.k); j++) begin
          for (int nt = 0; nt < np; nt++) begin
            if (nt < tn && n0 + nt < int'(l.n)) begin
              int fa = int'(l.if_base) + ((n0 + nt) * ih + int'(l.s) * r + i) * iw + int'(l.s) * c + j;
              int wa = int'(l.w_base) + ((m * int'(l.n) + n0 + nt) * int'(l.k) + i) * int'(l.k) + j;
              logic [31:0] fv, wv;
              fv = mem[fa];
              wv = mem[wa];
              lanes[nt] = fmul(fv, wv);
            end else lanes[nt] = 32'd0;
          end
          sum = tree_sum(lanes, np);
          ba = int'(l.b_base) + m;
          bv = mem[ba];
          if (n0 == 0 && i == 0 && j == 0) acc = fadd(sum, bv);
          else                             acc = fadd(sum, acc);
        end
      end
    end
    return acc;
  endfunction

  // Cycles of Eq. 3: ceil(N/Tn) * ceil(M/Tm) * R * C * K^2.
  function automatic longint eq3_cycles(layer_desc_t l, int tn, int tm);
    return longint'((int'(l.n) + tn - 1) / tn) * ((int'(l.m) + tm - 1) / tm)
         * int'(l.r) * int'(l.c) * int'(l.k) * int'(l.k);
  endfunction

  function automatic layer_desc_t mk_layer(int n, int m, int r, int c, int k, int s, int tr, int tc,
                                           int if_base, int w_base, int b_base, int of_base);
    layer_desc_t l;
    l.n = cnt_t'(n); l.m = cnt_t'(m); l.r = cnt_t'(r); l.c = cnt_t'(c);
    l.k = cnt_t'(k); l.s = cnt_t'(s); l.tr = cnt_t'(tr); l.tc = cnt_t'(tc);
    l.if_base = addr_t'(if_base); l.w_base = addr_t'(w_base);
    l.b_base = addr_t'(b_base); l.of_base = addr_t'(of_base);
    return l;
  endfunction

  // Words of the input, weight, bias and output arrays of a layer.
  function automatic int if_words(layer_desc_t l);
    return int'(l.n) * (int'(l.s) * (int'(l.r) - 1) + int'(l.k)) * (int'(l.s) * (int'(l.c) - 1) + int'(l.k));
  endfunction
  function automatic int w_words(layer_desc_t l);
    return int'(l.m) * int'(l.n) * int'(l.k) * int'(l.k);
  endfunction
  function automatic int of_words(layer_desc_t l);
    return int'(l.m) * int'(l.r) * int'(l.c);
  endfunction
endpackage
