// tb_ref_pkg: independent arithmetic reference for the testbenches.
//
// Plain-integer models of the Qn.q operations of the core: the fixed-point product
// (exact product, arithmetic shift right by q, wrap to n+q bits), saturating addition,
// the reset mechanisms and one leaky integrate-and-fire time step. The testbenches use
// these to compute expected values without touching the design's own code.
package tb_ref_pkg;

  // Wrap an integer to a signed w-bit value.
  function automatic int wrap(longint v, int w);
    longint m = longint'(1) << w;
    longint r = v % m;
    if (r < 0) r += m;
    if (r >= (m >> 1)) r -= m;
    return int'(r);
  endfunction

  function automatic int sat(longint v, int w);
    longint hi = (longint'(1) << (w - 1)) - 1;
    longint lo = -(longint'(1) << (w - 1));
    if (v > hi) return int'(hi);
    if (v < lo) return int'(lo);
    return int'(v);
  endfunction

  // Fixed-point product of two signed Qn.q numbers.
  function automatic int fmul(int a, int b, int qn, int qq);
    longint c = longint'(a) * longint'(b);
    return wrap(c >>> qq, qn + qq);
  endfunction

  function automatic bit fmul_ovf(int a, int b, int qn, int qq);
    longint c = (longint'(a) * longint'(b)) >>> qq;
    return c != longint'(wrap(c, qn + qq));
  endfunction

  // Neuron parameters as plain integers.
  typedef struct {
    int growth;
    int decay;
    int vth;
    int vreset;
    int refper;
    bit refen;
    int mech;   // 0 const, 1 zero, 2 subtract, 3 default
  } ref_cfg_t;

  typedef struct {
    int vmem;
    int refcnt;
  } ref_state_t;

  // Counters of what happened inside lif_step, for coverage.
  typedef struct {
    int fires;
    int blocked;      // at or above threshold but refractory
    int held;         // membrane held during refractory
    int resets [4];   // fires per reset mechanism
    int mul_ovf;
  } ref_cov_t;

  // One spk_clk edge of a neuron: returns the spike registered at this edge.
  function automatic bit lif_step(inout ref_state_t s, input int act, input ref_cfg_t c,
                                  input int qn, input int qq, inout ref_cov_t cov);
    int w = qn + qq;
    bit ref_active = c.refen && (s.refcnt != 0);
    bit at_th = (s.vmem >= c.vth);
    bit fire = at_th && !ref_active;
    int dec = fmul(c.decay, s.vmem, qn, qq);
    int grw = fmul(c.growth, act, qn, qq);
    int nxt;
    if (fmul_ovf(c.decay, s.vmem, qn, qq) || fmul_ovf(c.growth, act, qn, qq)) cov.mul_ovf++;
    if (at_th && ref_active) cov.blocked++;
    if (ref_active) begin
      nxt = s.vmem;
      cov.held++;
    end else if (fire) begin
      case (c.mech)
        0: nxt = wrap(c.vreset, w);
        1: nxt = 0;
        2: nxt = sat(longint'(s.vmem) - c.vth, w);
        default: nxt = sat(longint'(s.vmem) - dec, w);
      endcase
      cov.resets[c.mech]++;
      cov.fires++;
    end else begin
      nxt = sat(longint'(s.vmem) + sat(longint'(grw) - dec, w), w);
    end
    if (fire && c.refen)   s.refcnt = c.refper;
    else if (s.refcnt != 0) s.refcnt = s.refcnt - 1;
    s.vmem = nxt;
    return fire;
  endfunction

  // Time-step model of a chain of layers. step() is called at each spk_clk edge with
  // the spike vector that becomes the first layer's input for the coming period; it
  // uses the inputs of the period that just ended, as the hardware does.
  class core_model;
    int k, qn, qq;
    int n_in;
    int ln [];          // neurons per layer
    int conn [];        // 0 full, 1 one-to-one, 2 Gaussian
    int wt [][][];      // [layer][neuron][connection]
    ref_cfg_t cfg [];
    ref_state_t st [][];
    bit pre [][];       // inputs held during the last period, per layer
    bit spk [][];       // spikes registered at the last edge
    int act [][];       // activations used at the last edge
    ref_cov_t cov [];
    int n_inhib, n_actsat, n_gauss_edge;

    function new(int k_, int n_in_, int ln_ [], int conn_ [], int qn_, int qq_);
      k = k_; n_in = n_in_; qn = qn_; qq = qq_;
      ln = ln_; conn = conn_;
      wt = new[k]; cfg = new[k]; st = new[k]; pre = new[k]; spk = new[k]; act = new[k]; cov = new[k];
      for (int l = 0; l < k; l++) begin
        int np = (l == 0) ? n_in : ln[l-1];
        wt[l] = new[ln[l]];
        for (int j = 0; j < ln[l]; j++) wt[l][j] = new[depth(l)];
        st[l] = new[ln[l]];
        foreach (st[l][j]) st[l][j] = '{vmem: 0, refcnt: 0};
        pre[l] = new[np];
        spk[l] = new[ln[l]];
        act[l] = new[ln[l]];
        cov[l] = '{default: 0, resets: '{default: 0}};
        cfg[l] = '{growth: 0, decay: 0, vth: (1 << (qn + qq - 1)) - 1, vreset: 0, refper: 0, refen: 0, mech: 2};
      end
      n_inhib = 0; n_actsat = 0; n_gauss_edge = 0;
    endfunction

    function int depth(int l);
      int np = (l == 0) ? n_in : ln[l-1];
      case (conn[l])
        1: return 1;
        2: return 3;
        default: return np;
      endcase
    endfunction

    // Pre-synaptic index of connection c of neuron j in layer l (-1: no connection).
    function int pre_index(int l, int j, int c);
      int np = (l == 0) ? n_in : ln[l-1];
      int i;
      case (conn[l])
        1: i = j;
        2: i = j - 1 + c;
        default: i = c;
      endcase
      return (i >= 0 && i < np) ? i : -1;
    endfunction

    function void step(bit in_next []);
      int w = qn + qq;
      for (int l = 0; l < k; l++) begin
        bit any = 0;
        foreach (pre[l][i]) any |= pre[l][i];
        for (int j = 0; j < ln[l]; j++) begin
          int a = 0;
          bit sat_seen = 0;
          if (any) begin
            for (int c = 0; c < depth(l); c++) begin
              int i = pre_index(l, j, c);
              if (i < 0) begin
                n_gauss_edge++;
              end else if (pre[l][i]) begin
                int t = a + wt[l][j][c];
                if (wt[l][j][c] < 0) n_inhib++;
                a = sat(t, w);
                if (a != t) sat_seen = 1;
              end
            end
          end
          if (sat_seen) n_actsat++;
          act[l][j] = a;
          spk[l][j] = lif_step(st[l][j], a, cfg[l], qn, qq, cov[l]);
        end
      end
      foreach (pre[0][i]) pre[0][i] = in_next[i];
      for (int l = 1; l < k; l++) foreach (pre[l][i]) pre[l][i] = spk[l-1][i];
    endfunction
  endclass

endpackage
