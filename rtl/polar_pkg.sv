// polar_pkg: types and arithmetic shared by the polar code encoder and the
// successive cancellation (SC) decoder.
//
// LLRs are two's complement numbers of LLR_W bits, kept in the symmetric range
// [-LLR_MAX, +LLR_MAX] so that the magnitude of every value fits and f/g never
// wrap. The two node functions follow the min-sum forms of the SC literature:
//   f(a,b)   = sgn(a) sgn(b) min(|a|,|b|)          (check node)
//   g(a,b,s) = (-1)^s a + b, saturated              (variable node)
// The LLR width and the saturation are this design's choice; the node
// functions themselves are the ones the SC decoder is built from.
package polar_pkg;

  localparam int unsigned LLR_W   = 6;
  localparam int          LLR_MAX = (1 << (LLR_W - 1)) - 1;
  localparam logic signed [LLR_W+1:0] LLR_MAX_W =  (LLR_W+2)'(LLR_MAX);
  localparam logic signed [LLR_W+1:0] LLR_MIN_W = -(LLR_W+2)'(LLR_MAX);

  typedef logic signed [LLR_W-1:0] llr_t;

  // Clamp a wider signed value into the symmetric LLR range.
  function automatic llr_t llr_sat(input logic signed [LLR_W+1:0] v);
    if (v > LLR_MAX_W)      return llr_t'(LLR_MAX_W);
    else if (v < LLR_MIN_W) return llr_t'(LLR_MIN_W);
    else                   return llr_t'(v);
  endfunction

  // Check node: sign product times the smaller magnitude.
  function automatic llr_t llr_f(input llr_t a, input llr_t b);
    logic signed [LLR_W+1:0] ma, mb, m;
    ma = (a < 0) ? -(LLR_W+2)'(a) : (LLR_W+2)'(a);
    mb = (b < 0) ? -(LLR_W+2)'(b) : (LLR_W+2)'(b);
    m  = (ma < mb) ? ma : mb;
    return llr_sat(((a < 0) != (b < 0)) ? -m : m);
  endfunction

  // Variable node: b plus a, or b minus a when the partial sum s is 1.
  function automatic llr_t llr_g(input llr_t a, input llr_t b, input logic s);
    logic signed [LLR_W+1:0] wa, wb;
    wa = (LLR_W+2)'(a);
    wb = (LLR_W+2)'(b);
    return llr_sat(s ? (wb - wa) : (wb + wa));
  endfunction

  // Hard decision: 0 if the LLR is strictly positive, 1 otherwise.
  function automatic logic llr_decide(input llr_t l);
    return !(l > 0);
  endfunction

  // Number of trailing zeros of v, limited to lim.
  function automatic int unsigned ctz_lim(input logic [31:0] v, input int unsigned lim);
    int unsigned r;
    r = 0;
    for (int unsigned b = 0; b < 32; b++) begin
      if (v[b] || r >= lim) break;
      r++;
    end
    return r;
  endfunction

endpackage
