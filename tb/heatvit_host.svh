// heatvit_host.svh: host model and reference checks shared by the end-to-end
// testbenches of heatvit_top. The including module defines TI, TO, TH, HEADS,
// N_MAX, D_MAX, RW, AW, WAW, NW, the DUT port signals, clk, checks and
// failures. The host loads buffers the way the SoC processor would, runs one
// job at a time and compares the output buffer with values computed here:
// integer GEMM plus requantisation exactly, GELU / Sigmoid / Softmax with the
// paper's formulas in real arithmetic (within 1, 1 and 2 LSB).

  byte xin  [N_MAX][D_MAX];     // input matrix of the next job
  byte wts  [][];               // weight matrix [Do_total][Di]
  int  obuf [N_MAX][D_MAX];     // output buffer image read back
  // mechanism counters
  int m_sum = 0, m_concat = 0, m_gelu = 0, m_sigmoid = 0, m_softmax = 0;
  int m_pruned = 0, m_package = 0, m_forced = 0, m_wstall = 0, m_overlap = 0, m_avg = 0;

  function automatic real h_exp(real xv);
    real z, p;
    z = $floor(-xv / $ln(2.0));
    p = xv + z * $ln(2.0);
    return (0.3585 * (p + 1.353) ** 2 + 0.344) / (2.0 ** z);
  endfunction

  function automatic real h_gelu(real xv);
    real u, au, l;
    u  = xv / $sqrt(2.0);
    au = (u < 0) ? -u : u;
    if (au > 1.769) au = 1.769;
    l  = 0.5 * (-0.2888 * (au - 1.769) ** 2 + 1.0);
    if (u < 0) l = -l; else if (u == 0) l = 0;
    return xv / 2.0 * (1.0 + l);
  endfunction

  function automatic real h_plan(real xv);
    real a, r;
    a = (xv < 0) ? -xv : xv;
    if (a >= 5.0) r = 1.0;
    else if (a >= 2.375) r = 0.03125 * a + 0.84375;
    else if (a >= 1.0) r = 0.125 * a + 0.625;
    else r = 0.25 * a + 0.5;
    return (xv < 0) ? 1.0 - r : r;
  endfunction

  function automatic int h_sat(longint v);
    return (v > 127) ? 127 : (v < -128) ? -128 : int'(v);
  endfunction

  task automatic h_check(input int hw, input int ref_v, input int tol, input string what);
    checks++;
    if (hw - ref_v > tol || ref_v - hw > tol) begin
      failures++;
      if (failures < 15) $display("FAIL %s: hw %0d ref %0d", what, hw, ref_v);
    end
  endtask

  // Load rows 0..nt-1, di channels, of xin into the fill bank and commit it.
  task automatic h_load_input(input int nt, input int di);
    while (!in_ready) @(posedge clk);
    #1;
    for (int n = 0; n < nt; n++)
      for (int w = 0; w < di / TI; w++) begin
        in_wr_en = 1; in_wr_addr = AW'(n * RW + w);
        for (int k = 0; k < TI; k++) in_wr_data[8*k +: 8] = xin[n][w*TI + k];
        @(posedge clk); #1;
      end
    in_wr_en = 0;
    if (busy) m_overlap++;
    in_commit = 1; @(posedge clk); #1; in_commit = 0;
  endtask

  // Load every weight tile of a job, waiting for a free bank each time.
  task automatic h_load_weights(input int ntiles, input int di);
    for (int t = 0; t < ntiles; t++) begin
      if (!w_ready) m_wstall++;
      while (!w_ready) begin @(posedge clk); #1; end
      for (int w = 0; w < di / TI; w++)
        for (int o = 0; o < TO; o++) begin
          w_wr_en = 1; w_wr_addr = WAW'(w); w_wr_seg = ($clog2(TO))'(o);
          for (int k = 0; k < TI; k++) w_wr_data[8*k +: 8] = wts[t*TO + o][w*TI + k];
          @(posedge clk); #1;
        end
      w_wr_en = 0;
      w_commit = 1; @(posedge clk); #1; w_commit = 0;
    end
  endtask

  task automatic h_read_output(input int nt, input int ncol);
    for (int n = 0; n < nt; n++)
      for (int w = 0; w < (ncol + TO - 1) / TO; w++) begin
        ob_raddr = AW'(n * RW + w);
        @(posedge clk); #1;
        for (int k = 0; k < TO; k++) if (w*TO + k < D_MAX) obuf[n][w*TO + k] = int'($signed(ob_rdata[8*k +: 8]));
      end
  endtask

  // One GEMM job. attn = 0: out[n][o] over all di channels, do_n outputs.
  // attn = 1: per head h, out[n][h*do_n + o] over the head's slice, do_n
  // outputs per head. The weight matrix wts must have do_n (rounded up to TO)
  // rows. Softmax groups are the first sm_len outputs of a row (or head).
  task automatic h_gemm(input int nt, input int di, input int do_n, input bit attn,
                        input int shift, input heatvit_pkg::act_e act, input int sm_len,
                        input bit loaded = 0, input bit pre = 0);
    int do_t, ncol, cyc;
    int ref_q [N_MAX][D_MAX];
    do_t = (do_n + TO - 1) / TO;
    ncol = attn ? HEADS * do_t * TO : do_t * TO;
    if (!loaded) h_load_input(nt, di);
    desc = '0;
    desc.job = heatvit_pkg::JOB_GEMM; desc.n_tok = 9'(nt); desc.di_w = 8'(di / TI);
    desc.do_t = 8'(do_t); desc.attn = attn; desc.shift = 5'(shift); desc.act = act;
    desc.sm_len = 9'(sm_len);
    start = 1; @(posedge clk); #1; start = 0;
    cyc = 0;
    fork
      h_load_weights(do_t, di);
      if (pre) h_load_input(nt, di);   // next job's input, into the other bank
      begin while (!done) begin @(posedge clk); #1; cyc++; end end
    join
    h_read_output(nt, ncol);
    // reference
    for (int n = 0; n < nt; n++) begin
      for (int h = 0; h < (attn ? HEADS : 1); h++)
        for (int o = 0; o < do_t * TO; o++) begin
          longint acc = 0;
          int lo, hi;
          lo = attn ? h * di / HEADS : 0;
          hi = attn ? (h + 1) * di / HEADS : di;
          for (int c = lo; c < hi; c++) acc += longint'(xin[n][c]) * longint'(wts[o][c]);
          ref_q[n][h * do_t * TO + o] = h_sat(acc >>> shift);
        end
      for (int h = 0; h < (attn ? HEADS : 1); h++) begin
        int base;
        real s;
        int mx;
        base = h * do_t * TO;
        if (act == heatvit_pkg::ACT_SOFTMAX) begin
          mx = -128; s = 0;
          for (int o = 0; o < sm_len; o++) if (ref_q[n][base+o] > mx) mx = ref_q[n][base+o];
          for (int o = 0; o < sm_len; o++) s += h_exp((ref_q[n][base+o] - mx) / 16.0);
          for (int o = 0; o < do_t * TO; o++) begin
            real r;
            r = (o < sm_len) ? 0.5 * h_exp((ref_q[n][base+o] - mx) / 16.0) / s * 256.0 : 0.0;
            h_check(obuf[n][base+o], (r > 127.0) ? 127 : int'($floor(r)), 2, "softmax");
          end
        end else
          for (int o = 0; o < do_t * TO; o++) begin
            int q;
            q = ref_q[n][base+o];
            case (act)
              heatvit_pkg::ACT_GELU:    h_check(obuf[n][base+o], int'($floor(h_gelu(q / 16.0) * 16.0)), 1, "gelu");
              heatvit_pkg::ACT_SIGMOID: h_check(obuf[n][base+o], (h_plan(q / 16.0) * 128.0 > 127.0) ? 127 : int'($floor(h_plan(q / 16.0) * 128.0)), 1, "sigmoid");
              default:                  h_check(obuf[n][base+o], q, 0, "gemm");
            endcase
          end
      end
    end
    if (attn) m_concat++; else m_sum++;
    if (act == heatvit_pkg::ACT_GELU) m_gelu++;
    if (act == heatvit_pkg::ACT_SIGMOID) m_sigmoid++;
    if (act == heatvit_pkg::ACT_SOFTMAX) m_softmax++;
    $display("gemm job: %0d tokens, Di %0d, Do %0d%s, %0d cycles", nt, di, do_n, attn ? " per head" : "", cyc);
  endtask

  // Token selection. s_out: output-buffer image of the per-head 2-class
  // softmax (head h at columns h*TO, h*TO+1); a_out: sigmoid head weights at
  // columns 0..HEADS-1. The selected tokens come back in obuf and xin.
  task automatic h_select(input int nt, input int di, input int npk,
                          input int s_img [N_MAX][D_MAX], input int a_img [N_MAX][D_MAX],
                          output int nout);
    int exp_rows [N_MAX][D_MAX];
    int acc [D_MAX];
    int ne, nk, np;
    int amb;
    for (int t = 0; t < nt; t++) begin
      sc_we = 1; sc_addr = (NW-1)'(t);
      for (int h = 0; h < HEADS; h++) begin
        sc_wdata[(0*HEADS + h)*8 +: 8] = 8'(s_img[t][h*TO]);
        sc_wdata[(1*HEADS + h)*8 +: 8] = 8'(s_img[t][h*TO + 1]);
        sc_wdata[(2*HEADS + h)*8 +: 8] = 8'(a_img[t][h]);
      end
      @(posedge clk); #1;
    end
    sc_we = 0;
    h_load_input(nt, di);
    desc = '0;
    desc.job = heatvit_pkg::JOB_SELECT; desc.n_tok = 9'(nt); desc.di_w = 8'(di / TI);
    desc.n_pkg_in = 9'(npk); desc.thr = 8'd128;
    start = 1; @(posedge clk); #1; start = 0;
    while (!done) begin @(posedge clk); #1; end
    nout = int'(n_out);
    h_read_output(nout, di);
    // Expected result. A token whose two weighted scores are within 3/256
    // of each other is too close to call in real arithmetic; for such a
    // token the decision is read off the output (is the next output row this
    // token?), everything else is predicted.
    ne = 0; nk = 0; np = 0; amb = 0;
    foreach (acc[c]) acc[c] = 0;
    for (int t = 0; t < nt; t++) begin
      real sk, sp, den;
      bit k;
      sk = 0; sp = 0; den = 0;
      for (int h = 0; h < HEADS; h++) begin
        sk += s_img[t][h*TO] * a_img[t][h]; sp += s_img[t][h*TO+1] * a_img[t][h]; den += a_img[t][h];
      end
      if (den > 0) begin sk /= den; sp /= den; end
      k = (sk > sp);
      if (t != 0 && t < nt - npk && (sk - sp < 3.0 && sp - sk < 3.0)) begin
        bit same;
        same = 1;
        for (int c = 0; c < di; c++) if (obuf[ne][c] != xin[t][c]) same = 0;
        k = same && (ne < int'(n_kept));
        amb++;
      end
      if (t == 0 || t >= nt - npk) k = 1;
      if (k) begin
        for (int c = 0; c < di; c++) exp_rows[ne][c] = xin[t][c];
        ne++; nk++;
      end else begin
        for (int c = 0; c < di; c++) acc[c] += xin[t][c];
        np++;
      end
    end
    if (np > 0) begin
      for (int c = 0; c < di; c++) exp_rows[ne][c] = int'($floor(real'(acc[c]) / np));
      ne++;
    end
    h_check(int'(n_out), ne, 0, "n_out");
    h_check(int'(n_kept), nk, 0, "n_kept");
    for (int r = 0; r < ne; r++)
      for (int c = 0; c < di; c++)
        h_check(obuf[r][c], exp_rows[r][c], (np > 0 && r == ne - 1) ? 1 : 0, "selected token");
    if (amb > 0) $display("select job: %0d tokens too close to call, decision taken from the output", amb);
    if (int'(n_kept) < nt) m_pruned++;
    if (int'(n_kept) < nt) m_package++;
    if (npk > 0) m_forced++;
    // the dense result becomes the next stage's input
    for (int r = 0; r < nout; r++) for (int c = 0; c < di; c++) xin[r][c] = byte'(obuf[r][c]);
    $display("select job: %0d tokens in, %0d kept, %0d out", nt, n_kept, nout);
  endtask

  // Average job: the mean of all nt rows of xin (the classifier's global
  // feature) comes back as output row 0, within one LSB of the exact mean.
  task automatic h_average(input int nt, input int di);
    h_load_input(nt, di);
    desc = '0;
    desc.job = heatvit_pkg::JOB_AVG; desc.n_tok = 9'(nt); desc.di_w = 8'(di / TI);
    start = 1; @(posedge clk); #1; start = 0;
    while (!done) begin @(posedge clk); #1; end
    h_read_output(1, di);
    h_check(int'(n_out), 1, 0, "average n_out");
    for (int c = 0; c < di; c++) begin
      int acc;
      acc = 0;
      for (int t = 0; t < nt; t++) acc += int'(xin[t][c]);
      h_check(obuf[0][c], int'($floor(real'(acc) / nt)), 1, "average");
    end
    m_avg++;
    $display("average job: %0d tokens", nt);
  endtask

  // One pruning stage: classifier layers on the engine, then token selection,
  // then a Q x K^T attention layer on the pruned tokens.
  task automatic h_stage(input int nt, input int di, input int npk, output int nout);
    int s_img [N_MAX][D_MAX];
    int a_img [N_MAX][D_MAX];
    int g_img [N_MAX][D_MAX];
    byte x0 [N_MAX][D_MAX];
    x0 = xin;
    // token feature FC + GELU (Sum mode)
    wts = new[((di + TO - 1) / TO) * TO];
    foreach (wts[o]) begin wts[o] = new[di]; foreach (wts[o][c]) wts[o][c] = byte'($urandom_range(0, 15) - 8); end
    h_gemm(nt, di, di, 0, 4 + $clog2(di) / 2, heatvit_pkg::ACT_GELU, 0, 0, 1);
    g_img = obuf;
    // per-head keep/prune logits + Softmax over the two classes (Concat mode)
    xin = x0;
    wts = new[TO];
    foreach (wts[o]) begin wts[o] = new[di]; foreach (wts[o][c]) wts[o][c] = (o < 2) ? byte'($urandom_range(0, 31) - 16) : 8'sd0; end
    h_gemm(nt, di, 2, 1, 3 + $clog2(di / HEADS) / 2, heatvit_pkg::ACT_SOFTMAX, 2, 1, 1);
    s_img = obuf;
    // head weights: FC + Sigmoid (Sum mode)
    xin = x0;
    wts = new[TO];
    foreach (wts[o]) begin wts[o] = new[di]; foreach (wts[o][c]) wts[o][c] = (o < HEADS) ? byte'($urandom_range(0, 15) - 8) : 8'sd0; end
    h_gemm(nt, di, HEADS, 0, 5 + $clog2(di) / 2, heatvit_pkg::ACT_SIGMOID, 0, 1, 0);
    a_img = obuf;
    // global feature: mean over the tokens of the feature layer's output
    for (int r = 0; r < nt; r++) for (int c = 0; c < di; c++) xin[r][c] = byte'(g_img[r][c]);
    h_average(nt, di);
    xin = x0;
    h_select(nt, di, npk, s_img, a_img, nout);
    // attention scores of the pruned tokens: Q x K^T with K = the tokens
    wts = new[((nout + TO - 1) / TO) * TO];
    foreach (wts[o]) begin wts[o] = new[di]; foreach (wts[o][c]) wts[o][c] = (o < nout) ? xin[o][c] : 8'sd0; end
    h_gemm(nout, di, nout, 1, 8 + $clog2(di / HEADS), heatvit_pkg::ACT_SOFTMAX, nout);
  endtask

  task automatic h_report_mechanisms();
    $display("mechanisms: sum %0d concat %0d gelu %0d sigmoid %0d softmax %0d pruned %0d package %0d forced-keep %0d weight-stall %0d input-overlap %0d average %0d",
             m_sum, m_concat, m_gelu, m_sigmoid, m_softmax, m_pruned, m_package, m_forced, m_wstall, m_overlap, m_avg);
    begin
      int m [11];
      m = '{m_sum, m_concat, m_gelu, m_sigmoid, m_softmax, m_pruned, m_package, m_forced, m_wstall, m_overlap, m_avg};
      foreach (m[i]) begin
        checks++;
        if (m[i] == 0) begin failures++; $display("mechanism %0d never happened", i); end
      end
    end
  endtask
