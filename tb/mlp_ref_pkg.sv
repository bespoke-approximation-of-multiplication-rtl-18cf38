// mlp_ref_pkg: integer reference model of the bespoke approximate MLP, used
// by the testbenches of mlp_top. It evaluates the network directly from the
// parameter vectors (weight codes, keep masks, bias codes, comparator masks,
// pairing order) with plain integer arithmetic: sum of sign * (x AND mask) *
// 2^exponent plus bias, QRelu as max(0, min(v >> shift, 255)), and the
// argmax tree stage by stage. It also counts how often each approximation
// or activation mechanism acted, so that a testbench can require that each
// of them was exercised.
package mlp_ref_pkg;
  import mlp_pkg::*;

  typedef enum int {
    ST_NULLIFY  = 0,  // QRelu set a negative pre-activation to zero
    ST_CLIP     = 1,  // QRelu clipped a value to 255
    ST_REMOVED  = 2,  // a removed summand bit was 1 (approximation changed a sum)
    ST_CMP_DIFF = 3,  // a masked comparison decided differently from an exact one
    ST_CLS_DIFF = 4,  // approximate argmax differs from the exact argmax
    ST_BYE      = 5,  // a candidate passed an argmax stage unopposed
    ST_NUM      = 6
  } stat_e;

  typedef int stats_t [ST_NUM];

  function automatic int code_val(logic [7:0] c, int v);
    if (c[6:0] == 7'h7F) return 0;
    return (c[7] ? -v : v) * (1 << int'(c[6:0]));
  endfunction

  // Returns the class chosen by the approximate argmax; exact_cls receives
  // the first index of the exact maximum of the output values.
  function automatic int infer(
      input int n_in, input int n_hid, input int n_out, input int qshift,
      input logic [MAX_WEIGHTS*CODE_W-1:0] hw, input logic [MAX_WEIGHTS*Q_W-1:0] hm,
      input logic [MAX_NEURONS*CODE_W-1:0] hb,
      input logic [MAX_WEIGHTS*CODE_W-1:0] ow, input logic [MAX_WEIGHTS*Q_W-1:0] om,
      input logic [MAX_NEURONS*CODE_W-1:0] ob,
      input logic [MAX_NEURONS*CMP_MASK_W-1:0] cmask,
      input logic [MAX_STAGES*MAX_NEURONS*ORDER_W-1:0] order,
      input int x [], output int exact_cls, ref stats_t st);
    int act [] = new[n_hid];
    int outv [] = new[n_out];
    int val [] = new[n_out];
    int id [] = new[n_out];
    int w = Q_W + MAX_SHIFT + $clog2(n_hid + 1) + 1;
    int c, cmp, best;

    for (int n = 0; n < n_hid; n++) begin
      int pre = code_val(hb[n*CODE_W +: CODE_W], 1);
      for (int i = 0; i < n_in; i++) begin
        int k = n * n_in + i;
        int m = int'(hm[k*IN_W +: IN_W]);
        if ((x[i] & ~m & 15) != 0 && hw[k*CODE_W +: 7] != 7'h7F) st[ST_REMOVED]++;
        pre += code_val(hw[k*CODE_W +: CODE_W], x[i] & m);
      end
      if (pre < 0) begin act[n] = 0; st[ST_NULLIFY]++; end
      else if ((pre >>> qshift) > 255) begin act[n] = 255; st[ST_CLIP]++; end
      else act[n] = pre >>> qshift;
    end

    for (int n = 0; n < n_out; n++) begin
      int pre = code_val(ob[n*CODE_W +: CODE_W], 1);
      for (int i = 0; i < n_hid; i++) begin
        int k = n * n_hid + i;
        int m = int'(om[k*Q_W +: Q_W]);
        if ((act[i] & ~m & 255) != 0 && ow[k*CODE_W +: 7] != 7'h7F) st[ST_REMOVED]++;
        pre += code_val(ow[k*CODE_W +: CODE_W], act[i] & m);
      end
      outv[n] = pre;
    end

    best = 0;
    for (int n = 1; n < n_out; n++) if (outv[n] > outv[best]) best = n;
    exact_cls = best;

    for (int n = 0; n < n_out; n++) begin val[n] = outv[n]; id[n] = n; end
    c = n_out;
    cmp = 0;
    for (int s = 0; c > 1; s++) begin
      int sv [] = new[c];
      int si [] = new[c];
      for (int p = 0; p < c; p++) begin
        int src = int'(order[(s*MAX_NEURONS+p)*ORDER_W +: ORDER_W]);
        sv[p] = val[src];
        si[p] = id[src];
      end
      for (int k = 0; k < c / 2; k++) begin
        longint m = longint'(cmask[cmp*CMP_MASK_W +: CMP_MASK_W]) & ((64'd1 << w) - 1);
        longint ka = (longint'(sv[2*k])   + (64'd1 << (w - 1))) & m;
        longint kb = (longint'(sv[2*k+1]) + (64'd1 << (w - 1))) & m;
        bit bw = kb > ka;
        if (bw != (sv[2*k+1] > sv[2*k])) st[ST_CMP_DIFF]++;
        val[k] = bw ? sv[2*k+1] : sv[2*k];
        id[k]  = bw ? si[2*k+1] : si[2*k];
        cmp++;
      end
      if (c % 2 == 1) begin
        val[c/2] = sv[c-1];
        id[c/2]  = si[c-1];
        st[ST_BYE]++;
      end
      c = (c + 1) / 2;
    end
    if (id[0] != exact_cls) st[ST_CLS_DIFF]++;
    return id[0];
  endfunction
endpackage
