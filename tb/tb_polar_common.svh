// Shared body of the end-to-end testbenches of polar_list_decoder.
//
// The including module declares localparams N, L, M, NFRAMES, the DUT
// instance `dut` and the clock/reset signals. This body
//  * builds a rate-1/2 code: reliabilities by the Bhattacharyya recursion
//    on a BEC(0.5) (z_f = 2z - z^2 for an f branch, z_g = z^2 for g), the
//    N/2 least reliable positions frozen;
//  * per frame draws a random message, appends its 16-bit CRC, encodes with
//    x = u F^{(x)n}, maps to BPSK LLRs with optional Gaussian noise,
//    scaled by 8 or 3 LSBs per unit amplitude and quantised to +-31;
//  * runs a bit-true reference list decoder written from the algorithm
//    (full path copies, thresholds from an explicit sort, partial sums
//    re-encoded from the decided bits) and compares u_hat, crc_ok and the
//    latency 4N + (n-2-log2 M)N/M - 5FS with the DUT;
//  * counts how often each mechanism occurs: DTS.1 acceptance, DTS.2
//    rejection, DTS.3 band fill, a list left short of L paths, frozen leaf,
//    frozen-sibling update, multi-cycle node, lazy copy from another path.

  localparam int LOGN = $clog2(N);
  localparam int K    = N / 2;
  localparam int R    = 16;
  localparam int LMAX = 31;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic [N-1:0] frozen_v;
  int           fs_count;
  logic [N-1:0] u_tx;
  int           llr_ch [N];

  // ---------------------------------------------------------------- code
  task automatic build_code();
    real z [N];
    for (int i = 0; i < N; i++) begin
      real zz;
      zz = 0.5;
      for (int d = 1; d <= LOGN; d++) begin
        if ((i >> (LOGN - d)) & 1) zz = zz * zz;
        else                       zz = 2.0 * zz - zz * zz;
      end
      z[i] = zz;
    end
    // freeze the N-K largest z (ties broken by lower index being frozen)
    for (int i = 0; i < N; i++) begin
      int rank;
      rank = 0;
      for (int j = 0; j < N; j++)
        if (z[j] > z[i] || (z[j] == z[i] && j < i)) rank++;
      frozen_v[i] = (rank < N - K);
    end
    fs_count = 0;
    for (int j = 0; j < N / 2; j++)
      if (frozen_v[2*j] && frozen_v[2*j+1]) fs_count++;
  endtask

  function automatic logic [15:0] crc_step(logic [15:0] r, logic b);
    return (r[15] ^ b) ? ((r << 1) ^ 16'h1021) : (r << 1);
  endfunction

  task automatic make_frame(input real sigma, input real scale);
    logic [N-1:0] x;
    logic [15:0]  crc;
    int           cnt;
    u_tx = '0;
    crc  = '0;
    cnt  = 0;
    for (int i = 0; i < N; i++) begin
      if (!frozen_v[i]) begin
        logic b;
        if (cnt < K - R) begin
          b   = $urandom_range(0, 1);
          crc = crc_step(crc, b);
        end else begin
          b = crc[15 - (cnt - (K - R))];
        end
        u_tx[i] = b;
        cnt++;
      end
    end
    x = u_tx;
    for (int h = 1; h < N; h = h * 2)
      for (int j = 0; j < N; j += 2 * h)
        for (int k = j; k < j + h; k++) x[k] = x[k] ^ x[k + h];
    for (int i = 0; i < N; i++) begin
      real nz, v;
      int  q;
      nz = 0.0;
      for (int t = 0; t < 12; t++) nz += $urandom_range(0, 65535) / 65536.0;
      nz = (nz - 6.0) * sigma;
      v  = (x[i] ? -1.0 : 1.0) + nz;
      q  = $rtoi(v * scale + (v >= 0 ? 0.5 : -0.5));
      if (q > LMAX) q = LMAX;
      if (q < -LMAX) q = -LMAX;
      llr_ch[i] = q;
    end
  endtask

  // ------------------------------------------------------ reference model
  int           r_llr  [L][LOGN+1][N];
  logic [N-1:0] r_u    [L];
  int           r_pm   [L];
  bit           r_val  [L];
  logic [N-1:0] r_uhat;
  bit           r_crcok;

  function automatic int f_fn(int a, int b);
    int ma, mb, m;
    ma = (a < 0) ? -a : a;  mb = (b < 0) ? -b : b;
    if (ma > LMAX) ma = LMAX;
    if (mb > LMAX) mb = LMAX;
    m = (ma < mb) ? ma : mb;
    return ((a < 0) != (b < 0)) ? -m : m;
  endfunction

  function automatic int g_fn(int a, int b, bit beta);
    int s;
    s = beta ? b - a : b + a;
    if (s > LMAX) s = LMAX;
    if (s < -LMAX) s = -LMAX;
    return s;
  endfunction

  function automatic int sat_pm(int v);
    return (v > 255) ? 255 : v;
  endfunction

  // re-encode bits u[lo .. lo+S-1] of a path with F^{(x)log S}
  function automatic bit enc_bit(logic [N-1:0] u, int lo, int S, int k);
    bit v [N];
    for (int q = 0; q < S; q++) v[q] = u[lo + q];
    for (int h = 1; h < S; h = h * 2)
      for (int j = 0; j < S; j += 2 * h)
        for (int q = j; q < j + h; q++) v[q] = v[q] ^ v[q + h];
    return v[k];
  endfunction

  task automatic ref_node(int p, int i, int d);
    int S, j;
    bit bv [N];
    S = N >> d;
    j = i >> (LOGN - d);
    if (j % 2 == 1) begin
      logic [N-1:0] vv;
      vv = '0;
      for (int q = 0; q < S; q++) vv[q] = r_u[p][(j - 1) * S + q];
      for (int h = 1; h < S; h = h * 2)
        for (int jj = 0; jj < S; jj += 2 * h)
          for (int q = jj; q < jj + h; q++) vv[q] = vv[q] ^ vv[q + h];
      for (int q = 0; q < S; q++) bv[q] = vv[q];
    end
    for (int k = 0; k < S; k++) begin
      int a, b;
      a = r_llr[p][d-1][k];
      b = r_llr[p][d-1][k + S];
      r_llr[p][d][k] = (j % 2 == 1) ? g_fn(a, b, bv[k]) : f_fn(a, b);
    end
  endtask

  task automatic ref_decode();
    int i;
    for (int p = 0; p < L; p++) begin
      r_u[p] = '0; r_pm[p] = 0; r_val[p] = (p == 0);
      for (int k = 0; k < N; k++) r_llr[p][0][k] = llr_ch[k];
    end
    i = 0;
    while (i < N) begin
      int  d0, tgt;
      bit  fsib;
      d0 = LOGN;
      for (int k = LOGN - 1; k >= 0; k--) if ((i >> k) & 1) d0 = LOGN - k;
      if (i == 0) d0 = 1;
      fsib = (i % 2 == 0) && frozen_v[i] && frozen_v[i+1];
      tgt  = fsib ? LOGN - 1 : LOGN;
      for (int p = 0; p < L; p++)
        if (r_val[p]) for (int d = d0; d <= tgt; d++) ref_node(p, i, d);
      if (fsib) begin
        for (int p = 0; p < L; p++) if (r_val[p]) begin
          int a0, a1;
          a0 = r_llr[p][LOGN-1][0]; a1 = r_llr[p][LOGN-1][1];
          r_pm[p] = sat_pm(r_pm[p] + (a0 < 0 ? -a0 : 0) + (a1 < 0 ? -a1 : 0));
        end
        i += 2;
      end else begin
        int  cpm [2*L];
        bit  cv  [2*L], kp [2*L];
        int  srt [L];
        int  at, rt, nacc, room, ns;
        int  npar [L], nbit [L];
        bit  nval [L];
        int  npm  [L];
        for (int p = 0; p < L; p++) begin
          int lv, mg;
          lv = r_llr[p][LOGN][0];
          mg = (lv < 0) ? -lv : lv;
          cpm[2*p]   = sat_pm(r_pm[p] + (lv < 0 ? mg : 0));
          cpm[2*p+1] = sat_pm(r_pm[p] + (lv < 0 ? 0 : mg));
          cv[2*p]    = r_val[p];
          cv[2*p+1]  = r_val[p] && !frozen_v[i];
          srt[p]     = r_val[p] ? r_pm[p] : 256;
        end
        srt.sort();
        at = srt[L/2];
        rt = (L >= 4) ? srt[L-2] : srt[L-1];
        nacc = 0;
        for (int c = 0; c < 2*L; c++) if (cv[c] && cpm[c] < at) nacc++;
        room = (nacc < L) ? L - nacc : 0;
        for (int c = 0; c < 2*L; c++) begin
          if (frozen_v[i]) kp[c] = cv[c];
          else if (cv[c] && cpm[c] < at) kp[c] = 1;
          else if (cv[c] && cpm[c] <= rt && room > 0) begin kp[c] = 1; room--; end
          else kp[c] = 0;
        end
        ns = 0;
        for (int s = 0; s < L; s++) begin nval[s] = 0; npar[s] = 0; nbit[s] = 0; npm[s] = 0; end
        for (int c = 0; c < 2*L; c++)
          if (kp[c] && ns < L) begin
            npar[ns] = c / 2; nbit[ns] = c % 2; nval[ns] = 1; npm[ns] = cpm[c]; ns++;
          end
        begin
          logic [N-1:0] ou [L];
          int           ol [L][LOGN+1][N];
          ou = r_u;
          ol = r_llr;
          for (int s = 0; s < L; s++) begin
            r_val[s] = nval[s];
            if (nval[s]) begin
              r_pm[s]     = npm[s];
              r_u[s]      = ou[npar[s]];
              r_u[s][i]   = nbit[s];
              r_llr[s]    = ol[npar[s]];
            end
          end
        end
        i += 1;
      end
    end
    // CRC selection
    begin
      int bp, ba;
      bit fp, fa;
      fp = 0; fa = 0; bp = 0; ba = 0;
      for (int p = 0; p < L; p++) begin
        logic [15:0] rem;
        rem = '0;
        for (int q = 0; q < N; q++) if (!frozen_v[q]) rem = crc_step(rem, r_u[p][q]);
        if (r_val[p] && rem == 0 && (!fp || r_pm[p] < r_pm[bp])) begin bp = p; fp = 1; end
        if (r_val[p] && (!fa || r_pm[p] < r_pm[ba])) begin ba = p; fa = 1; end
      end
      r_uhat  = fp ? r_u[bp] : r_u[ba];
      r_crcok = fp;
    end
  endtask

  // ------------------------------------------------- mechanism counters
  int n_accept_ev = 0, n_reject_ev = 0, n_band_ev = 0, n_short_ev = 0;
  int n_frozen_leaf = 0, n_fs = 0, n_multichunk = 0, n_lazy = 0, n_crc_fail = 0;
  int busy_cycles = 0;

  always @(posedge clk) begin
    if (dut.busy && dut.state != polar_pkg::ST_CRC) busy_cycles++;
    if (dut.dts_commit && !dut.frozen_leaf) begin
      int kept;
      kept = 0;
      for (int c = 0; c < 2*L; c++) kept += dut.keep[c];
      if (dut.n_accept != 0) n_accept_ev++;
      if (dut.n_reject != 0) n_reject_ev++;
      if (kept > dut.n_accept) n_band_ev++;
      if (kept < L && dut.pm_inf[L-1] < (1 << 8)) n_short_ev++;
    end
    if (dut.dts_commit && dut.frozen_leaf) n_frozen_leaf++;
    if (dut.fs_en) n_fs++;
    if (dut.node_en && dut.chunk != 0) n_multichunk++;
    if (dut.lcp)
      for (int s = 0; s < L; s++) if (dut.slot_valid[s] && dut.parent[s] != s) begin n_lazy++; break; end
  end

  // ------------------------------------------------------------ stimulus
  task automatic run_frame(input real sigma, input real scale, input bit expect_tx);
    int t0, expected_lat;
    make_frame(sigma, scale);
    ref_decode();
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      ch_we   = 1'b1;
      ch_addr = LOGN'(i);
      ch_data = 6'(llr_ch[i]);
    end
    @(negedge clk);
    ch_we = 1'b0;
    busy_cycles = 0;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    expected_lat = 4*N + (LOGN - 2 - $clog2(M)) * N / M - 5 * fs_count;
    checks++;
    if (busy_cycles != expected_lat) begin
      failures++;
      $display("FAIL latency %0d, expected %0d", busy_cycles, expected_lat);
    end
    checks++;
    if (u_hat !== r_uhat || crc_ok !== r_crcok) begin
      failures++;
      $display("FAIL u_hat/crc_ok differ from reference (crc_ok %0b ref %0b)", crc_ok, r_crcok);
    end
    if (!crc_ok) n_crc_fail++;
    if (expect_tx) begin
      checks++;
      if (u_hat !== u_tx || !crc_ok) begin
        failures++;
        $display("FAIL noiseless frame not decoded to the transmitted word");
      end
    end
  endtask

  initial begin
    ch_we = 0; ch_addr = '0; ch_data = '0; start = 0; rst_n = 0;
    build_code();
    frozen = frozen_v;
    $display("code N=%0d K=%0d L=%0d M=%0d frozen siblings FS=%0d", N, K, L, M, fs_count);
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run_frame(0.0, 8.0, 1'b1);
    for (int f = 1; f < NFRAMES; f++) run_frame((f % 3 == 0) ? 1.5 : (f % 3 == 1) ? 0.9 : 1.2, (f % 2) ? 8.0 : 3.0, 1'b0);
    $display("latency %0d cycles per frame", busy_cycles);
    $display("mechanisms: accept=%0d reject=%0d band=%0d short_list=%0d frozen_leaf=%0d fs=%0d multichunk=%0d lazy=%0d crc_fail_frames=%0d",
             n_accept_ev, n_reject_ev, n_band_ev, n_short_ev, n_frozen_leaf, n_fs, n_multichunk, n_lazy, n_crc_fail);
    checks++; if (n_accept_ev == 0)   begin failures++; $display("FAIL DTS.1 never accepted"); end
    checks++; if (n_reject_ev == 0)   begin failures++; $display("FAIL DTS.2 never rejected"); end
    checks++; if (n_band_ev == 0)     begin failures++; $display("FAIL DTS.3 never filled"); end
    checks++; if (n_short_ev == 0)    begin failures++; $display("FAIL list never left short"); end
    checks++; if (n_frozen_leaf == 0) begin failures++; $display("FAIL no frozen leaf"); end
    checks++; if (n_fs == 0)          begin failures++; $display("FAIL no frozen sibling"); end
    checks++; if (n_multichunk == 0)  begin failures++; $display("FAIL no multi-cycle node"); end
    checks++; if (n_lazy == 0)        begin failures++; $display("FAIL no lazy copy"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
