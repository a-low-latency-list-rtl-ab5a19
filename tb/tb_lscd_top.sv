// tb_lscd_top: end-to-end test of the list decoder at a reduced size (N=128, K=72, L=8, M=8).
//
// Drives lscd_top through complete decodings and checks each against a
// behavioural reference decoder written independently inside this
// testbench: it keeps full per-path LLR arrays and copies them on pruning
// (no pointers), recomputes partial sums directly from the decided bits,
// and applies the same selective-expansion, TTA and DTS rules written as
// plain sequential code. Checked per decoding: the decoded information bits,
// the CRC flag, the L final path metrics and the number of busy cycles
// against D = 3N + (N/M)log2(N/4M) - 4(N_I+N_II+N_IV) - (N_III+N_V).
// The code construction (frozen and reliable sets) is a Bhattacharyya-bound
// ordering computed here; a shuffled layout containing every couple case is also decoded.
// Counts how often each mechanism occurred (each couple case, pruning with
// k above / below L/2 and k = 0, real path copies, paths failing the CRC)
// and counts a failure for any that never did.
module tb_lscd_top;
  import lscd_pkg::*;

  localparam int N   = 128;
  localparam int K   = 72;
  localparam int L   = 8;
  localparam int M   = 8;
  localparam int Q   = 6;
  localparam int PMW = 8;
  localparam int R   = 16;
  localparam int LOGN = $clog2(N);
  localparam int H   = L / 2;
  localparam int RT_IDX = 3 * L / 4 - 1;
  localparam int LMAX = (1 << (Q - 1)) - 1;
  localparam int PMMAX = (1 << PMW) - 1;
  localparam int TRIALS = 12;
  localparam int WATCHDOG = 400000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic flag_we = 1'b0;
  logic [LOGN-1:0] flag_addr = '0;
  bit_kind_e flag_kind = KIND_FROZEN;
  logic chan_we = 1'b0;
  logic [$clog2(N/M)-1:0] chan_addr = '0;
  logic signed [Q-1:0] chan_data [M];
  logic start = 1'b0;
  logic busy, done, crc_ok;
  logic [K-1:0] dec_bits;

  lscd_top #(.N(N), .K(K), .L(L), .M(M)) dut (
    .clk (clk), .rst_n (rst_n), .flag_we (flag_we), .flag_addr (flag_addr),
    .flag_kind (flag_kind), .chan_we (chan_we), .chan_addr (chan_addr),
    .chan_data (chan_data), .start (start), .busy (busy), .done (done),
    .dec_bits (dec_bits), .crc_ok (crc_ok));

  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin : watchdog
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ------------------------------------------------------------ mechanism counters
  int n_case [8];
  int n_dts_big = 0, n_dts_small = 0, n_dts_zero = 0, n_copy = 0, n_crc_reject = 0;
  always @(posedge clk) begin
    if (dut.u_lm.dts_fire) begin
      if (int'(dut.u_lm.dts_k) > H) n_dts_big++;
      if (int'(dut.u_lm.dts_k) < H) n_dts_small++;
      if (dut.u_lm.dts_k == 0) n_dts_zero++;
      if (dut.u_lm.lc_moved != 0) n_copy++;
    end
  end

  // ------------------------------------------------------------ code and channel
  bit_kind_e kinds [N];
  int        llr   [N];
  bit        u_tx  [N];
  bit        msg   [K];

  function automatic bit [R-1:0] crc_step(input bit [R-1:0] c, input bit b);
    bit fb;
    fb = c[R-1] ^ b;
    c  = c << 1;
    if (fb) c = c ^ 16'h1021;
    return c;
  endfunction

  // frozen / reliable / unreliable sets from the Bhattacharyya ordering
  task automatic construct(input real z0, input int n_rel);
    real z [N];
    int  order [N];
    for (int i = 0; i < N; i++) begin
      z[i] = z0;
      for (int b = LOGN - 1; b >= 0; b--) z[i] = ((i >> b) & 1) ? z[i] * z[i] : 2.0 * z[i] - z[i] * z[i];
      order[i] = i;
    end
    for (int a = 1; a < N; a++)
      for (int b = a; b > 0 && z[order[b]] < z[order[b-1]]; b--) begin
        int tmp; tmp = order[b]; order[b] = order[b-1]; order[b-1] = tmp;
      end
    for (int i = 0; i < N; i++) kinds[i] = KIND_FROZEN;
    for (int r = 0; r < K; r++) kinds[order[r]] = (r < n_rel) ? KIND_RELIABLE : KIND_UNRELIABLE;
  endtask

  // couple layout with given case counts (I, II, III, IV, V, VI), shuffled
  task automatic pattern(input int cnt [6]);
    couple_case_e cs [N/2];
    int p;
    p = 0;
    for (int a = 0; a < 6; a++)
      for (int b = 0; b < cnt[a]; b++) begin cs[p] = couple_case_e'(a + 1); p++; end
    for (int a = N / 2 - 1; a > 0; a--) begin
      int b;
      couple_case_e tmp;
      b = $urandom_range(a, 0);
      tmp = cs[a]; cs[a] = cs[b]; cs[b] = tmp;
    end
    for (int c = 0; c < N / 2; c++) begin
      unique case (cs[c])
        CASE_I:   begin kinds[2*c] = KIND_RELIABLE;   kinds[2*c+1] = KIND_RELIABLE;   end
        CASE_II:  begin kinds[2*c] = KIND_FROZEN;     kinds[2*c+1] = KIND_RELIABLE;   end
        CASE_III: begin kinds[2*c] = KIND_UNRELIABLE; kinds[2*c+1] = KIND_RELIABLE;   end
        CASE_IV:  begin kinds[2*c] = KIND_FROZEN;     kinds[2*c+1] = KIND_FROZEN;     end
        CASE_V:   begin kinds[2*c] = KIND_FROZEN;     kinds[2*c+1] = KIND_UNRELIABLE; end
        default:  begin kinds[2*c] = KIND_UNRELIABLE; kinds[2*c+1] = KIND_UNRELIABLE; end
      endcase
    end
  endtask

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom_range(1000000, 1))) / 1000001.0;
    u2 = (real'($urandom_range(1000000, 0))) / 1000001.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  // random message with CRC, polar encoding, BPSK + AWGN, quantised LLRs
  task automatic make_frame(input real sigma, input real scale, input bit zero);
    bit [R-1:0] c;
    bit x [N];
    int p;
    c = '0;
    for (int k = 0; k < K - R; k++) begin
      msg[k] = zero ? 1'b0 : 1'($urandom_range(1, 0));
      c = crc_step(c, msg[k]);
    end
    for (int k = 0; k < R; k++) msg[K - R + k] = c[R-1-k];
    p = 0;
    for (int i = 0; i < N; i++) begin
      u_tx[i] = 1'b0;
      if (kinds[i] != KIND_FROZEN) begin u_tx[i] = msg[p]; p++; end
      x[i] = u_tx[i];
    end
    for (int h = 1; h < N; h = h * 2)
      for (int j = 0; j < N; j++)
        if ((j & h) == 0) x[j] = x[j] ^ x[j + h];
    for (int i = 0; i < N; i++) begin
      real y, v;
      y = (x[i] ? -1.0 : 1.0) + sigma * gauss();
      v = y * scale;
      llr[i] = (v >= 0.0) ? int'(v + 0.5) : -int'(-v + 0.5);
      if (llr[i] > LMAX) llr[i] = LMAX;
      if (llr[i] < -LMAX) llr[i] = -LMAX;
    end
  endtask

  // ------------------------------------------------------------ reference decoder
  int  rl  [L][LOGN+1][N];   // LLRs per path and stage
  int  nl  [L][LOGN+1][N];   // copy buffers for pruning
  bit  nu  [L][N];
  bit  ru  [L][N];           // decided source bits per path
  int  rpm [L];
  bit  ref_bits [K];
  bit  ref_pass;
  int  ref_pm [L];

  function automatic int f_fn(input int a, input int b);
    int ma, mb, m;
    ma = (a < 0) ? -a : a;
    mb = (b < 0) ? -b : b;
    m  = (ma < mb) ? ma : mb;
    return ((a < 0) != (b < 0)) ? -m : m;
  endfunction

  function automatic int g_fn(input int a, input int b, input bit s);
    int v;
    v = s ? b - a : b + a;
    if (v > LMAX) v = LMAX;
    if (v < -LMAX) v = -LMAX;
    return v;
  endfunction

  function automatic int sat(input int v);
    return (v > PMMAX) ? PMMAX : v;
  endfunction

  function automatic int iabs(input int v);
    return (v < 0) ? -v : v;
  endfunction

  // g nodes re-encode the path's last 2^t decided bits: s = u F^(x)t
  task automatic ref_node(input int t, input bit is_g, input int i);
    bit sv [N];
    for (int l = 0; l < L; l++) begin
      if (is_g) begin
        int w;
        w = 1 << t;
        for (int a = 0; a < w; a++) sv[a] = ru[l][i - w + a];
        for (int h = 1; h < w; h = h * 2)
          for (int a = 0; a < w; a++)
            if ((a & h) == 0) sv[a] = sv[a] ^ sv[a + h];
      end
      for (int j = 0; j < (1 << t); j++)
        rl[l][t][j] = is_g ? g_fn(rl[l][t+1][j], rl[l][t+1][j + (1 << t)], sv[j])
                           : f_fn(rl[l][t+1][j], rl[l][t+1][j + (1 << t)]);
    end
  endtask

  // stable insertion sort of (value, index) pairs
  task automatic sort_pairs(inout int v [], inout int ix []);
    for (int a = 1; a < v.size(); a++)
      for (int b = a; b > 0 && v[b] < v[b-1]; b--) begin
        int tv, ti;
        tv = v[b]; v[b] = v[b-1]; v[b-1] = tv;
        ti = ix[b]; ix[b] = ix[b-1]; ix[b-1] = ti;
      end
  endtask

  task automatic ref_prune(input int lam [L], input int i);
    int ordv [L], ordi [L];
    int v0 [], i0 [], v1 [], i1 [], vl [], il [];
    int rt, nk, kk, q;
    int par [L];
    bit odd [L];
    int npm [L];
    v0 = new[H]; i0 = new[H]; v1 = new[H]; i1 = new[H]; vl = new[H]; il = new[H];
    for (int j = 0; j < H; j++) begin
      v0[j] = rpm[j]; i0[j] = j; v1[j] = rpm[j + H]; i1[j] = j + H;
    end
    sort_pairs(v0, i0);
    sort_pairs(v1, i1);
    for (int j = 0; j < H; j++) begin
      if (v0[j] <= v1[H-1-j]) begin
        ordv[j] = v0[j]; ordi[j] = i0[j]; vl[H-1-j] = v1[H-1-j]; il[H-1-j] = i1[H-1-j];
      end else begin
        ordv[j] = v1[H-1-j]; ordi[j] = i1[H-1-j]; vl[H-1-j] = v0[j]; il[H-1-j] = i0[j];
      end
    end
    sort_pairs(vl, il);
    for (int j = 0; j < H; j++) begin ordv[H+j] = vl[j]; ordi[H+j] = il[j]; end
    rt = ordv[RT_IDX];
    nk = 0;
    for (int r = 0; r < L; r++) if (sat(rpm[ordi[r]] + iabs(lam[ordi[r]])) <= rt) nk++;
    kk = (nk > H) ? H : nk;
    for (int l = 0; l < L; l++) begin par[l] = ordi[l]; odd[l] = 0; npm[l] = rpm[ordi[l]]; end
    q = 0;
    for (int r = 0; r < L; r++) begin
      int pv;
      pv = sat(rpm[ordi[r]] + iabs(lam[ordi[r]]));
      if (pv <= rt && q < kk) begin
        par[L - kk + q] = ordi[r]; odd[L - kk + q] = 1; npm[L - kk + q] = pv; q++;
      end
    end
    for (int l = 0; l < L; l++) begin
      nl[l] = rl[par[l]];
      nu[l] = ru[par[l]];
      nu[l][i] = (lam[par[l]] < 0) ^ odd[l];
    end
    rl = nl;
    ru = nu;
    rpm = npm;
  endtask

  task automatic ref_leaf(input int i, input bit is_g, input bit_kind_e k);
    int lam [L];
    for (int l = 0; l < L; l++)
      lam[l] = is_g ? g_fn(rl[l][1][0], rl[l][1][1], ru[l][i-1]) : f_fn(rl[l][1][0], rl[l][1][1]);
    if (k == KIND_UNRELIABLE) begin
      ref_prune(lam, i);
    end else begin
      for (int l = 0; l < L; l++) begin
        ru[l][i] = (k == KIND_RELIABLE) ? (lam[l] < 0) : 1'b0;
        if (k == KIND_FROZEN && lam[l] < 0) rpm[l] = sat(rpm[l] - lam[l]);
      end
    end
  endtask

  task automatic ref_decode();
    int best, bl;
    bit found;
    for (int l = 0; l < L; l++) begin
      rpm[l] = (l == 0) ? 0 : PMMAX;
      for (int i = 0; i < N; i++) begin rl[l][LOGN][i] = llr[i]; ru[l][i] = 0; end
    end
    for (int c = 0; c < N / 2; c++) begin
      int s;
      couple_case_e cc;
      if (c == 0) s = LOGN - 1;
      else begin s = 1; while (((2 * c) >> s) % 2 == 0) s++; end
      for (int t = s; t >= 1; t--) ref_node(t, (c != 0) && (t == s), 2 * c);
      cc = classify(kinds[2*c], kinds[2*c+1]);
      if (cc == CASE_I || cc == CASE_II || cc == CASE_IV) begin
        for (int l = 0; l < L; l++) begin
          int a, b;
          a = rl[l][1][0]; b = rl[l][1][1];
          if (cc == CASE_I) begin
            ru[l][2*c] = (a < 0) ^ (b < 0); ru[l][2*c+1] = (b < 0);
          end else if (cc == CASE_II) begin
            ru[l][2*c] = 0; ru[l][2*c+1] = (a + b < 0);
            if ((a < 0) != (b < 0)) rpm[l] = sat(rpm[l] + ((iabs(a) < iabs(b)) ? iabs(a) : iabs(b)));
          end else begin
            ru[l][2*c] = 0; ru[l][2*c+1] = 0;
            rpm[l] = sat(rpm[l] + ((a < 0) ? -a : 0) + ((b < 0) ? -b : 0));
          end
        end
      end else begin
        ref_leaf(2 * c, 1'b0, kinds[2*c]);
        ref_leaf(2 * c + 1, 1'b1, kinds[2*c+1]);
      end
    end
    // output choice
    found = 0; best = 0; bl = 0;
    for (int l = 0; l < L; l++) begin
      bit [R-1:0] cr;
      cr = '0;
      for (int i = 0; i < N; i++) if (kinds[i] != KIND_FROZEN) cr = crc_step(cr, ru[l][i]);
      if (cr == 0) n_crc_reject = n_crc_reject;
      else n_crc_reject++;
      if (cr == 0 && (!found || rpm[l] < best)) begin found = 1; best = rpm[l]; bl = l; end
    end
    if (!found) begin
      bl = 0; best = rpm[0];
      for (int l = 1; l < L; l++) if (rpm[l] < best) begin best = rpm[l]; bl = l; end
    end
    ref_pass = found;
    begin
      int p;
      p = 0;
      for (int i = 0; i < N; i++) if (kinds[i] != KIND_FROZEN) begin ref_bits[p] = ru[bl][i]; p++; end
    end
    ref_pm = rpm;
  endtask

  // ------------------------------------------------------------ one decoding on the DUT
  int n_frame_err = 0;

  task automatic load_flags();
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      flag_we = 1; flag_addr = LOGN'(i); flag_kind = kinds[i];
    end
    @(negedge clk);
    flag_we = 0;
  endtask

  function automatic int expected_latency(output int na);
    int d, cnt [8];
    for (int a = 0; a < 8; a++) cnt[a] = 0;
    na = 0;
    for (int c = 0; c < N / 2; c++) begin
      couple_case_e cc;
      cc = classify(kinds[2*c], kinds[2*c+1]);
      cnt[int'(cc)]++;
      n_case[int'(cc)]++;
    end
    d = 3 * N + (N / M) * ($clog2(N / (4 * M)));
    d = d - 4 * (cnt[1] + cnt[2] + cnt[4]) - (cnt[3] + cnt[5]);
    // couples a polar code does not produce: 4 minus the cycles this schedule spends
    for (int c = 0; c < N / 2; c++)
      if (classify(kinds[2*c], kinds[2*c+1]) == CASE_NA) begin
        na++;
        d = d - (4 - (2 + int'(kinds[2*c] == KIND_UNRELIABLE) + int'(kinds[2*c+1] == KIND_UNRELIABLE)));
      end
    return d;
  endfunction

  task automatic run_frame(input string tag, input int expect_lat, input bit must_decode);
    longint t0;
    int busy_cycles;
    bit ok;
    for (int w = 0; w < N / M; w++) begin
      @(negedge clk);
      chan_we = 1; chan_addr = $clog2(N/M)'(w);
      for (int j = 0; j < M; j++) chan_data[j] = Q'(llr[w * M + j]);
    end
    @(negedge clk);
    chan_we = 0;
    start = 1;
    @(negedge clk);
    start = 0;
    busy_cycles = 0;
    while (!done) begin
      if (busy) busy_cycles++;
      @(negedge clk);
    end
    ref_decode();
    ok = 1;
    for (int k = 0; k < K; k++) if (dec_bits[k] != ref_bits[k]) ok = 0;
    check(ok, {tag, ": decoded bits differ from reference"});
    check(crc_ok == ref_pass, {tag, ": CRC flag differs from reference"});
    ok = 1;
    for (int l = 0; l < L; l++) if (int'(dut.u_lm.pm[l]) != ref_pm[l]) ok = 0;
    check(ok, {tag, ": path metrics differ from reference"});
    check(busy_cycles == expect_lat, $sformatf("%s: latency %0d, expected %0d", tag, busy_cycles, expect_lat));
    ok = 1;
    for (int k = 0; k < K; k++) if (dec_bits[k] != msg[k]) ok = 0;
    if (!ok) n_frame_err++;
    if (must_decode) check(ok && crc_ok, {tag, ": transmitted word not recovered"});
    $display("%s: latency %0d cycles (expected %0d), crc_ok=%0d, %s", tag, busy_cycles, expect_lat,
             crc_ok, ok ? "recovered" : "frame error");
  endtask

  initial begin
    int lat, na;
    for (int a = 0; a < 8; a++) n_case[a] = 0;
    for (int j = 0; j < M; j++) chan_data[j] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // code construction from the Bhattacharyya ordering, about 72% reliable
    construct(0.5, (K * 7235) / 10000);
    load_flags();
    lat = expected_latency(na);
    if (na != 0) $display("construction has %0d couples of no paper case", na);
    make_frame(0.0, 6.0, 1'b0);
    run_frame("noise-free", lat, 1'b1);
    for (int f = 0; f < TRIALS; f++) begin
      lat = expected_latency(na);
      make_frame(0.55 + 0.05 * real'(f % 6), 6.0, 1'b0);
      run_frame($sformatf("awgn frame %0d", f), lat, 1'b0);
    end
    // no selective expansion: every information bit unreliable
    construct(0.5, 0);
    load_flags();
    for (int f = 0; f < 4; f++) begin
      lat = expected_latency(na);
      make_frame(0.8, 6.0, 1'b0);
      run_frame($sformatf("all-unreliable frame %0d", f), lat, 1'b0);
    end
    // synthetic layout containing every couple case
    begin
      int cnt [6];
      cnt = '{17, 4, 8, 23, 6, 6};
      for (int f = 0; f < 4; f++) begin
        pattern(cnt);
        load_flags();
        lat = expected_latency(na);
        make_frame((f == 0) ? 0.0 : 0.7, 6.0, 1'b0);
        run_frame($sformatf("all-cases frame %0d", f), lat, f == 0);
      end
    end
    $display("couple cases I..VI, n/a: %0d %0d %0d %0d %0d %0d %0d", n_case[1], n_case[2], n_case[3],
             n_case[4], n_case[5], n_case[6], n_case[7]);
    $display("pruning steps with k>L/2: %0d, k<L/2: %0d, k=0: %0d, with path copies: %0d, CRC-failing candidate paths: %0d, frame errors: %0d",
             n_dts_big, n_dts_small, n_dts_zero, n_copy, n_crc_reject, n_frame_err);
    check(n_case[1] > 0 && n_case[2] > 0 && n_case[3] > 0 && n_case[4] > 0 && n_case[5] > 0 && n_case[6] > 0,
          "not every couple case occurred");
    check(n_dts_big > 0, "no pruning step with k > L/2");
    check(n_dts_small > 0, "no pruning step with k < L/2");
    check(n_dts_zero > 0, "no pruning step with k = 0");
    check(n_copy > 0, "no path copy");
    check(n_crc_reject > 0, "no candidate path failed the CRC");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
