// ref_pkg: reference arithmetic and network model for the testbenches.
//
// The FP16 operations here are computed independently of the RTL: operands
// are converted to double precision, the exact sum or product is formed there
// (exact, since binary16 sums and products need at most 41 significant bits)
// and rounded once to binary16 with ties to even, flushing results below the
// smallest normal number to zero. This is the rounding contract the RTL units
// promise, so results must agree bit for bit (with +0 == -0).
package ref_pkg;

  typedef logic [15:0] h_t;

  function automatic real h2r(h_t a);
    real m;
    int  e;
    if (a[14:10] == 5'd0) return 0.0;
    m = 1.0 + real'(a[9:0]) / 1024.0;
    e = int'(a[14:10]) - 15;
    while (e > 0) begin m = m * 2.0; e--; end
    while (e < 0) begin m = m / 2.0; e++; end
    return a[15] ? -m : m;
  endfunction

  function automatic h_t r2h(real x);
    logic s;
    real  m, f;
    int   e, ip;
    s = (x < 0.0);
    m = s ? -x : x;
    if (m == 0.0) return {s, 15'd0};
    e = 0;
    while (m >= 2.0) begin m = m / 2.0; e++; end
    while (m < 1.0)  begin m = m * 2.0; e--; end
    m  = m * 1024.0;
    ip = $rtoi(m);
    f  = m - real'(ip);
    if (f > 0.5 || (f == 0.5 && (ip % 2) == 1)) ip++;
    if (ip == 2048) begin ip = 1024; e++; end
    if (e + 15 <= 0)  return {s, 15'd0};
    if (e + 15 >= 31) return {s, 15'h7C00};
    return {s, 5'(e + 15), 10'(ip)};
  endfunction

  function automatic h_t radd(h_t a, h_t b); return r2h(h2r(a) + h2r(b)); endfunction
  function automatic h_t rmul(h_t a, h_t b); return r2h(h2r(a) * h2r(b)); endfunction

  function automatic bit heq(h_t a, h_t b);
    if (a[14:10] == 0 && b[14:10] == 0) return 1'b1;
    return a == b;
  endfunction

  // Random number with an exponent in [emin, emax], random sign.
  function automatic h_t hrand(int emin, int emax);
    int e;
    e = emin + int'($urandom_range(emax - emin));
    return {1'($urandom), 5'(e), 10'($urandom)};
  endfunction

  // LIF step, tau_m = 2, reset to zero after a spike.
  function automatic void rlif(h_t i_cur, h_t v_prev, h_t v_th, output h_t v_next, output bit spk);
    h_t d, h, v;
    d = radd(i_cur, {~v_prev[15], v_prev[14:0]});
    h = r2h(h2r(d) / 2.0);
    v = radd(v_prev, h);
    spk = h2r(v) > h2r(v_th);
    v_next = spk ? 16'h0000 : v;
  endfunction

  function automatic h_t rtrace(h_t s_prev, h_t lambda_, h_t x);
    return radd(rmul(lambda_, s_prev), x);
  endfunction

  // dw = ((alpha*(Sj*Si)) + delta) + (beta*Sj + gamma*Si); returns w + dw.
  function automatic h_t rplast(h_t alpha, h_t beta, h_t gamma, h_t delta, h_t sj, h_t si, h_t w);
    h_t a, bc, dw;
    a  = radd(rmul(alpha, rmul(sj, si)), delta);
    bc = radd(rmul(beta, sj), rmul(gamma, si));
    dw = radd(a, bc);
    return radd(w, dw);
  endfunction

  // One layer of the network, computed in program order: a forward pass
  // over all inputs, then (separately) the update of every synapse.
  // w[j][i] is the weight from input j to neuron i.
  class layer_ref;
    int n_pre, n_post;
    bit spike_in;
    h_t w[][], al[][], be[][], ga[][], de[][];
    h_t v[], post_tr[], pre_tr[];
    bit spk[];

    function new(int n_pre_, int n_post_, bit spike_in_);
      n_pre = n_pre_; n_post = n_post_; spike_in = spike_in_;
      w = new[n_pre]; al = new[n_pre]; be = new[n_pre]; ga = new[n_pre]; de = new[n_pre];
      foreach (w[j]) begin
        w[j] = new[n_post]; al[j] = new[n_post]; be[j] = new[n_post]; ga[j] = new[n_post]; de[j] = new[n_post];
      end
      v = new[n_post]; post_tr = new[n_post]; spk = new[n_post]; pre_tr = new[n_pre];
      clear();
    endfunction

    function void clear();
      foreach (w[j, i]) w[j][i] = 0;
      foreach (v[i]) begin v[i] = 0; post_tr[i] = 0; spk[i] = 0; end
      foreach (pre_tr[j]) pre_tr[j] = 0;
    endfunction

    function void forward(h_t x[], h_t v_th, h_t lambda_);
      for (int i = 0; i < n_post; i++) begin
        h_t acc, vn; bit s;
        acc = 0;
        for (int j = 0; j < n_pre; j++)
          if (x[j][14:10] != 0) acc = radd(acc, spike_in ? w[j][i] : rmul(w[j][i], x[j]));
        rlif(acc, v[i], v_th, vn, s);
        v[i] = vn; spk[i] = s;
        post_tr[i] = rtrace(post_tr[i], lambda_, s ? 16'h3C00 : 16'h0000);
      end
      for (int j = 0; j < n_pre; j++) pre_tr[j] = rtrace(pre_tr[j], lambda_, x[j]);
    endfunction

    function void update();
      foreach (w[j, i]) w[j][i] = rplast(al[j][i], be[j][i], ga[j][i], de[j][i], pre_tr[j], post_tr[i], w[j][i]);
    endfunction
  endclass

endpackage
