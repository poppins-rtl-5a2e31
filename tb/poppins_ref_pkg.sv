// poppins_ref_pkg: independent behavioural reference of the processor, used by
// the testbenches to compute expected values.
//
// It is written with plain integers (no bit-level tricks shared with the RTL):
// floor division for the a/b products and the decay shift, explicit saturation,
// and a whole time step of one population (stimulus latch, accumulation in the
// documented row order, decay, neuron update, spike capture).
package poppins_ref_pkg;

  function automatic int floordiv(int x, int d);
    if (x >= 0) return x / d;
    return -((-x + d - 1) / d);
  endfunction

  function automatic int sat8(int x);
    if (x > 127)  return 127;
    if (x < -128) return -128;
    return x;
  endfunction

  // Eq. (1)-(2) with a, b given as codes (value code/8)
  function automatic void neuron_step(input int vm, input int a, input int b, input int vr,
                                      input int vt, input int vres, input int vpde, input int i_in,
                                      output int vm_n, output bit spk);
    int dv, s;
    if (vm < vpde) dv = floordiv(a * (vr - vm), 8) + i_in;
    else           dv = floordiv(b * (vm - vt), 8) + i_in;
    s = vm + dv;
    spk = (s > 255);
    if (s > 255)    vm_n = vres;
    else if (s < 0) vm_n = 0;
    else            vm_n = s;
  endfunction

  // Eq. (5); zero stays zero
  function automatic int decay(int y, int alpha);
    int s;
    if (y == 0) return 0;
    s = floordiv(y, 1 << alpha);
    if (s == 0) s = (y < 0) ? -1 : 1;
    return y - s;
  endfunction

  class npu_model;
    int M, H, ROWS, GROUPS;
    bit has_hier;
    int w[][];          // [row][neuron] signed weight
    bit gs[][];         // [row][group]
    int syn[], vm[], cur_buf[], cur[];
    bit spk[];          // M+1, previous step
    // configuration
    int act_log2, sub1_log2, sub2_log2, alpha, period;
    bit chop, hier_en;
    int a, b, vr, vt, vres, vpde;
    int opcnt;
    // statistics of the last step
    int reads, rows_served, skipped;
    bit decayed;

    function new(int m, int h, bit hh);
      M = m; H = h; has_hier = hh; ROWS = 2 * m; GROUPS = m / 8;
      w = new[ROWS]; gs = new[ROWS];
      foreach (w[r]) begin
        w[r] = new[M];
        gs[r] = new[GROUPS];
        foreach (gs[r][g]) gs[r][g] = 1;
      end
      syn = new[M]; vm = new[M + 1]; cur_buf = new[M + 1]; cur = new[M + 1]; spk = new[M + 1];
      act_log2 = $clog2(m); sub1_log2 = $clog2(m) - 1; sub2_log2 = $clog2(m) - 1;
      alpha = 2; period = 0; chop = 0; hier_en = 1;
      a = 2; b = 2; vr = 40; vt = 120; vres = 40; vpde = 80; opcnt = 0;
    endfunction

    function automatic int lim(int x, int mx); return (x > mx) ? mx : x; endfunction

    function automatic bit is_active(int n);
      int act_n, s1, s2;
      if (n == M) return 1;
      act_n = 1 << lim(act_log2, $clog2(M));
      s1 = 1 << lim(sub1_log2, $clog2(M) - 1);
      s2 = 1 << lim(sub2_log2, $clog2(M) - 1);
      if (chop) return (n < s1) || (n >= M / 2 && n < M / 2 + s2);
      return n < act_n;
    endfunction

    function automatic void serve(int r, bit sub2_only);
      rows_served++;
      for (int g = 0; g < GROUPS; g++) begin
        bit recv;
        recv = is_active(g * 8) && (!sub2_only || g * 8 >= M / 2);
        if (gs[r][g] && recv) begin
          reads++;
          for (int k = 0; k < 8; k++) syn[g * 8 + k] = sat8(syn[g * 8 + k] + w[r][g * 8 + k]);
        end else if (recv) skipped++;
      end
    endfunction

    // one time step; hier[] are the first hierarchy's spikes of the previous step
    function automatic void step(bit hier[]);
      bit nspk[];
      nspk = new[M + 1];
      reads = 0; rows_served = 0; skipped = 0;
      foreach (cur[i]) cur[i] = cur_buf[i];
      decayed = (opcnt >= period);
      opcnt = decayed ? 0 : opcnt + 1;
      if (spk[M]) serve(ROWS - 1, 0);
      for (int i = 0; i < M; i++)
        if (spk[i] && is_active(i) && (!chop || i < M / 2)) serve(i, chop);
      if (chop)
        for (int i = M / 2; i < M; i++) if (spk[i] && is_active(i)) serve(i, 1);
      if (has_hier && hier_en)
        for (int j = 0; j < H; j++) if (hier[j]) serve(M + j, 0);
      if (decayed)
        for (int i = 0; i < M; i++) if (is_active(i)) syn[i] = decay(syn[i], alpha);
      for (int i = 0; i <= M; i++) begin
        int vn; bit s;
        if (is_active(i)) begin
          neuron_step(vm[i], a, b, vr, vt, vres, vpde, (i < M) ? syn[i] + cur[i] : cur[M], vn, s);
          vm[i] = vn; nspk[i] = s;
        end else nspk[i] = 0;
      end
      spk = nspk;
    endfunction

    function automatic void clear();
      foreach (syn[i]) syn[i] = 0;
      foreach (vm[i]) vm[i] = vr;
      foreach (spk[i]) spk[i] = 0;
      foreach (cur_buf[i]) cur_buf[i] = 0;
      foreach (cur[i]) cur[i] = 0;
      opcnt = 0;
    endfunction

    function automatic logic [31:0] word(int r, int g);
      logic [31:0] x;
      for (int k = 0; k < 8; k++) x[4 * k +: 4] = 4'(w[r][g * 8 + k]);
      return x;
    endfunction
  endclass

endpackage
