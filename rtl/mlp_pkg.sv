// mlp_pkg: constants, weight encoding and constant functions shared by the
// bespoke approximate MLP classifier.
//
// Number formats. Inputs are 4-bit unsigned features (features normalised to
// [0,1] and truncated to 4 bits). Hidden activations leave the QRelu as 8-bit
// unsigned values. Every weight and bias is a power of two and is hardwired as
// an 8-bit code: bit 7 is the sign (1 = negative) and bits 6:0 are the
// exponent, i.e. the left shift that aligns the operand inside the adder tree.
// The exponent 7'h7F marks a zero weight (no summand at all). The 8-bit code
// width follows the 8-bit power-of-two quantiser the design is trained with;
// the exact bit layout of the code is this design's own choice.
//
// Default network. The weights, summand masks and comparator masks of a real
// instance come from quantisation-aware training and from the approximation
// search; they are not published. The gen_* functions below therefore fill
// the default parameters with a fixed pseudo-random pattern (an integer hash of
// the position), so that the RTL elaborates and can be simulated at the sizes
// of the evaluated networks. Replace the parameters of mlp_top with trained
// values to obtain a real classifier.
package mlp_pkg;

  localparam int unsigned IN_W      = 4;    // input feature width
  localparam int unsigned Q_W       = 8;    // QRelu output width
  localparam int unsigned CODE_W    = 8;    // power-of-2 weight code width
  localparam int unsigned MAX_SHIFT = 7;    // largest weight exponent used
  localparam logic [6:0]  ZERO_EXP  = 7'h7F;

  // Capacity of the default-parameter generators (not limits of the RTL).
  localparam int unsigned MAX_WEIGHTS = 2048;  // weights per layer
  localparam int unsigned MAX_NEURONS = 64;    // neurons per layer
  localparam int unsigned MAX_STAGES  = 6;     // argmax stages
  localparam int unsigned CMP_MASK_W  = 32;    // bits per comparator mask
  localparam int unsigned ORDER_W     = 8;     // bits per argmax order entry

  typedef logic [CODE_W-1:0] wcode_t;

  // ---- weight code helpers --------------------------------------------
  function automatic logic code_is_zero(wcode_t c);
    return c[6:0] == ZERO_EXP;
  endfunction

  function automatic logic code_is_neg(wcode_t c);
    return c[7];
  endfunction

  function automatic int unsigned code_shift(wcode_t c);
    return int'(c[6:0]);
  endfunction

  // ---- argmax tree geometry --------------------------------------------
  // Candidates entering stage s of a tree over n values.
  function automatic int unsigned stage_count(int unsigned n, int unsigned s);
    int unsigned c = n;
    for (int unsigned t = 0; t < s; t++) c = (c + 1) / 2;
    return c;
  endfunction

  // Number of comparison stages of a tree over n values.
  function automatic int unsigned num_stages(int unsigned n);
    int unsigned c = n;
    int unsigned s = 0;
    while (c > 1) begin
      c = (c + 1) / 2;
      s++;
    end
    return s;
  endfunction

  // Global index of the first comparator of stage s.
  function automatic int unsigned stage_base(int unsigned n, int unsigned s);
    int unsigned b = 0;
    for (int unsigned t = 0; t < s; t++) b += stage_count(n, t) / 2;
    return b;
  endfunction

  // ---- default-parameter generators -------------------------------------
  function automatic int unsigned mix(int unsigned x);
    x = x ^ (x >> 16);
    x = x * 32'h7feb352d;
    x = x ^ (x >> 15);
    x = x * 32'h846ca68b;
    x = x ^ (x >> 16);
    return x;
  endfunction

  // Weight codes of a layer, neuron-major: code (n,i) at bits [(n*n_in+i)*8 +: 8].
  // About one weight in sixteen is zero; exponents 0..MAX_SHIFT.
  function automatic logic [MAX_WEIGHTS*CODE_W-1:0] gen_weights(
      int unsigned seed, int unsigned n_neur, int unsigned n_in);
    logic [MAX_WEIGHTS*CODE_W-1:0] v;
    v = '0;
    for (int unsigned k = 0; k < n_neur * n_in; k++) begin
      int unsigned r;
      r = mix(seed * 32'h9E3779B9 + k);
      if (r[3:0] == 4'd0) v[k*CODE_W +: CODE_W] = {1'b0, ZERO_EXP};
      else                v[k*CODE_W +: CODE_W] = {r[4], 4'd0, r[10:8]};
    end
    return v;
  endfunction

  // Bias codes of a layer, one per neuron, exponents 0..max_shift.
  function automatic logic [MAX_NEURONS*CODE_W-1:0] gen_bias(
      int unsigned seed, int unsigned n_neur, int unsigned max_shift);
    logic [MAX_NEURONS*CODE_W-1:0] v;
    v = '0;
    for (int unsigned k = 0; k < n_neur; k++) begin
      int unsigned r;
      r = mix(seed * 32'h85EBCA6B + k);
      v[k*CODE_W +: CODE_W] = {r[5], 7'((r >> 8) % (max_shift + 1))};
    end
    return v;
  endfunction

  // Summand-bit keep masks of a layer (1 = kept, 0 = removed), neuron-major,
  // input bit b of weight (n,i) at bit (n*n_in+i)*iw+b. About one summand bit
  // in eight is removed, at any position.
  function automatic logic [MAX_WEIGHTS*Q_W-1:0] gen_mask(
      int unsigned seed, int unsigned n_neur, int unsigned n_in, int unsigned iw);
    logic [MAX_WEIGHTS*Q_W-1:0] v;
    v = '0;
    for (int unsigned k = 0; k < n_neur * n_in * iw; k++) begin
      int unsigned r;
      r = mix(seed * 32'hC2B2AE35 + k);
      v[k] = (r[2:0] != 3'd0);
    end
    return v;
  endfunction

  // Comparator bit-subset masks: comparator c ignores its (1 + c mod 4)
  // least significant bits, and every third comparator also ignores bit 5.
  function automatic logic [MAX_NEURONS*CMP_MASK_W-1:0] gen_cmp_mask(int unsigned n_cmp);
    logic [MAX_NEURONS*CMP_MASK_W-1:0] v;
    v = '0;
    for (int unsigned c = 0; c < n_cmp; c++) begin
      logic [CMP_MASK_W-1:0] m;
      m = '1;
      m = m << (1 + c % 4);
      if (c % 3 == 0) m[5] = 1'b0;
      v[c*CMP_MASK_W +: CMP_MASK_W] = m;
    end
    return v;
  endfunction

  // Pairing order of the argmax tree: for stage s, entry p (at bits
  // [(s*MAX_NEURONS+p)*8 +: 8]) names the stage input that goes to slot p;
  // slots (2k, 2k+1) are compared and an odd last slot passes unopposed.
  // Default: stage 0 interleaves the two halves of the outputs (output 0
  // against output ceil(n/2), ...), later stages keep the natural order.
  function automatic logic [MAX_STAGES*MAX_NEURONS*ORDER_W-1:0] gen_order(int unsigned n);
    logic [MAX_STAGES*MAX_NEURONS*ORDER_W-1:0] v;
    v = '0;
    for (int unsigned s = 0; s < MAX_STAGES; s++) begin
      int unsigned c;
      c = stage_count(n, s);
      for (int unsigned p = 0; p < c; p++) begin
        int unsigned q;
        q = p;
        if (s == 0) q = (p % 2 == 0) ? p / 2 : (c + 1) / 2 + p / 2;
        v[(s*MAX_NEURONS+p)*ORDER_W +: ORDER_W] = ORDER_W'(q);
      end
    end
    return v;
  endfunction

endpackage
