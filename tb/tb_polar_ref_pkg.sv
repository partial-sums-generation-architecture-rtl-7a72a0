// tb_polar_ref_pkg: reference models for the polar code testbenches.
//
// Written independently of the RTL: the encoder applies the n butterfly
// stages of the encoder graph (stage s XORs line k+2^s into line k for every
// k whose bit s is 0), the SC decoder evaluates every lambda_{k,j} of the
// factor graph from the defining equations for each bit, with the partial
// sums S_{k,j} taken as the values on the encoder graph's lines after
// stages 0..j-1 applied to the bits decided so far (undecided bits 0). Integer f/g use the same
// saturation range as the hardware (+-LLR_MAX), so results are bit exact.
// Also: frozen-set construction with Bhattacharyya parameters of a binary
// erasure channel (z = 0.5), and a BPSK/AWGN channel with quantised LLRs.
package tb_polar_ref_pkg;

  localparam int LMAX = 31;   // must equal polar_pkg::LLR_MAX

  function automatic int sat(input int v);
    return (v > LMAX) ? LMAX : (v < -LMAX) ? -LMAX : v;
  endfunction

  function automatic int ref_f(input int a, input int b);
    int ma, mb, m;
    ma = (a < 0) ? -a : a;
    mb = (b < 0) ? -b : b;
    m  = (ma < mb) ? ma : mb;
    return sat(((a < 0) ^ (b < 0)) ? -m : m);
  endfunction

  function automatic int ref_g(input int a, input int b, input bit s);
    return sat(s ? b - a : b + a);
  endfunction

  // X = U * kappa^{(x) n} by the butterfly stages of the encoder graph.
  function automatic void ref_encode(input int n, input bit u[], output bit x[]);
    int N = 1 << n;
    x = new[N];
    for (int k = 0; k < N; k++) x[k] = u[k];
    for (int s = 0; s < n; s++)
      for (int k = 0; k < N; k++)
        if (((k >> s) & 1) == 0) x[k] = x[k] ^ x[k + (1 << s)];
  endfunction

  // Partial sum S_{k,j}: line k after encoder stages 0..j-1 applied to v.
  function automatic void ref_psums(input int n, input bit v[], output bit s[][]);
    int N = 1 << n;
    s = new[n + 1];
    s[0] = new[N];
    for (int k = 0; k < N; k++) s[0][k] = v[k];
    for (int j = 0; j < n; j++) begin
      s[j+1] = new[N];
      for (int k = 0; k < N; k++)
        s[j+1][k] = (((k >> j) & 1) == 0) ? s[j][k] ^ s[j][k + (1 << j)] : s[j][k];
    end
  endfunction

  // Plain SC decoding from the factor-graph equations. For bit i only the
  // 2^j nodes of stage j that lambda_{i,0} depends on (the block of 2^j
  // indices containing i) are evaluated; after u_i is decided the partial
  // sums of the blocks containing i are recomputed from their definition.
  function automatic void ref_sc_decode(input int n, input int ch[], input bit frozen[],
                                        output bit u[]);
    int  N = 1 << n;
    int  lam [][];
    bit  s   [][];
    u   = new[N];
    lam = new[n + 1];
    s   = new[n + 1];
    for (int j = 0; j <= n; j++) begin
      lam[j] = new[N];
      s[j]   = new[N];
      for (int k = 0; k < N; k++) s[j][k] = 0;
    end
    for (int k = 0; k < N; k++) lam[n][k] = ch[k];
    for (int i = 0; i < N; i++) begin
      for (int j = n - 1; j >= 0; j--) begin
        int base = i & ~((1 << j) - 1);
        for (int k = base; k < base + (1 << j); k++)
          if (((k >> j) & 1) == 0) lam[j][k] = ref_f(lam[j+1][k], lam[j+1][k + (1 << j)]);
          else lam[j][k] = ref_g(lam[j+1][k - (1 << j)], lam[j+1][k], s[j][k - (1 << j)]);
      end
      u[i] = frozen[i] ? 1'b0 : (lam[0][i] <= 0);
      s[0][i] = u[i];
      for (int j = 0; j < n; j++) begin
        int base = i & ~((1 << (j + 1)) - 1);
        for (int k = base; k < base + (1 << (j + 1)); k++)
          s[j+1][k] = (((k >> j) & 1) == 0) ? s[j][k] ^ s[j][k + (1 << j)] : s[j][k];
      end
    end
  endfunction

  // Frozen set: the N-K positions with the largest BEC Bhattacharyya
  // parameter; z evolves from the top stage down (bit 0 -> 2z-z^2, 1 -> z^2).
  function automatic void ref_frozen(input int n, input int K, output bit frozen[]);
    int  N = 1 << n;
    real z [];
    bit  taken [];
    z = new[N];
    taken = new[N];
    frozen = new[N];
    for (int i = 0; i < N; i++) begin
      real t = 0.5;
      for (int b = n - 1; b >= 0; b--)
        t = (((i >> b) & 1) != 0) ? t * t : 2.0 * t - t * t;
      z[i] = t;
      frozen[i] = 0;
    end
    for (int c = 0; c < N - K; c++) begin
      int  w = -1;
      for (int i = 0; i < N; i++)
        if (!frozen[i] && (w < 0 || z[i] > z[w])) w = i;
      frozen[w] = 1;
    end
  endfunction

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom) + 1.0) / 4294967297.0;
    u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  // BPSK (0 -> +1) over AWGN at Eb/N0 = ebn0_db with rate R, LLR 2y/sigma^2
  // quantised with one fractional bit and saturated.
  function automatic int awgn_llr(input bit x, input real ebn0_db, input real rate);
    real sigma, y, l;
    int  q;
    sigma = $sqrt(1.0 / (2.0 * rate * (10.0 ** (ebn0_db / 10.0))));
    y = (x ? -1.0 : 1.0) + sigma * gauss();
    l = 2.0 * y / (sigma * sigma) * 2.0;
    q = int'(l);  // real to int conversion rounds to nearest
    return sat(q);
  endfunction

endpackage
