// tb_echo_suppression: the optimal-filter plus boxcar trigger configuration,
// with an efficiency scan over pulse amplitude, run through the complete
// level-1 trigger at full size (all default parameters).
//
// Set-up: two phonon channels (0 and 1) carry the same double-exponential
// pulses, A(t) = exp(-t/192) - exp(-t/24) in 625 kHz samples, on a baseline of
// 4000 counts with independent uniform white noise of +-950 counts (sigma_n =
// 548 counts). Two trigger paths run on ch0 + ch1:
//   path 0  optimal-filter-like FIR: 0.6 x the time-reversed template plus
//           positive side lobes 260 samples before and after the main lobe
//           (negative lobes at +-130), as an optimal filter gets from
//           low-frequency noise. The lobe height is computed here so that the
//           echo of a 100 sigma_n pulse reaches twice the activation
//           threshold (the zero-sum offset of the main lobe included);
//   path 1  boxcar FIR of width 5 around the template maximum.
// Both sets are offset so their taps sum to zero. ThL0 watches path 0 with
// activation 5 sigma and deactivation 0; ThL1 watches path 1 with 2.5 sigma
// and 0, sigma being each FIR output's measured noise. TrL0 accepts path 0 on
// its own threshold at the peak; TrL1 additionally requires the boxcar
// threshold somewhere in the window, which removes the echoes.
//
// Stimulus: 56 small pulses (0.1 to 1.0 sigma_n, 8 of each, 90 samples apart)
// for the efficiency turn-on, then pulses of 10, 40 and 100 sigma_n, two of
// each, 900 samples apart (so that one leaves the filter window before the
// next one's first echo), for the echo region.
//
// Checks: a bit-exact model of the chain predicts every stored entry; the
// readout must equal it with nothing lost. From the readout: efficiency must
// be 0 at 0.1 sigma_n and 100 % at 1.0 sigma_n for both rules, never drop by
// more than one pulse from one amplitude to the next, and the boxcar rule may
// cost at most two of the optimal filter's small-pulse triggers; at 10 sigma_n
// both rules give one trigger per pulse; at 100 sigma_n the optimal filter
// alone gives three (two echoes) and with the boxcar rule exactly one. The
// efficiency table is printed. Timing: 80 clocks per phonon sample, 20 per
// charge sample (50 MHz clock, 625 kHz / 2.5 MHz ADCs).
module tb_echo_suppression;
  import l1_pkg::*;

  localparam int NS     = 12400;          // downsampled samples
  localparam int PER_P  = 80;
  localparam int PER_C  = 20;
  localparam int C0     = 512;            // filter delay (samples)
  localparam int NAMP   = 7;              // small amplitudes
  localparam int NREP   = 8;              // pulses per small amplitude
  localparam int NSMALL = NAMP * NREP;
  localparam int NBIG   = 6;
  localparam int NPULSE = NSMALL + NBIG;
  localparam int SMALL0 = 1600, SMALL_GAP = 90;
  localparam int BIG0   = 7000, BIG_GAP = 900;
  localparam int Q0     = 1150, Q1 = 1550; // noise-only stretch
  localparam int TLEN   = 2400;           // template length, raw samples
  localparam int BASE   = 4000, NOISE = 950;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [2:0] adc_p_valid;
  logic [11:0][15:0] adc_p_data;
  logic [1:0] adc_c_valid;
  logic [3:0][15:0] adc_c_data;
  logic ext_veto, avs_read, avs_write, avs_readdatavalid, trig_available;
  logic [15:0] avs_address;
  logic [31:0] avs_writedata, avs_readdata;

  l1_trigger_top dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- stimulus ----------------------------------------------------
  real amp_small [NAMP] = '{0.1, 0.2, 0.3, 0.4, 0.5, 0.7, 1.0};   // in sigma_n
  real amp_big   [NBIG] = '{10.0, 40.0, 100.0, 10.0, 40.0, 100.0};
  int  pulse_k [NPULSE];
  real pulse_a [NPULSE];                  // ADC counts
  real shape [TLEN];
  int  noise [2][16*NS];
  bit  use_noise = 1;
  real sigma_n;

  function automatic int phonon_in(input int ch, input int j);
    real v;
    int p0;
    if (ch > 1) return 0;
    v = real'(BASE);
    if (use_noise) v += real'(noise[ch][j]);
    // pulses are sorted in time; only those that started within TLEN matter
    for (int p = 0; p < NPULSE; p++) begin
      int d;
      d = j - 16 * pulse_k[p];
      if (d >= 0 && d < TLEN) v += pulse_a[p] * shape[d];
    end
    p0 = 0;
    if (v > 65535.0) v = 65535.0;
    if (v < 0.0) v = 0.0;
    return int'(v) + p0;
  endfunction

  // ---------------- reference model ----------------------------------------------
  longint ds [2][NS];                     // with noise
  longint ds_nf [NS];                     // ch0 + ch1 without noise
  logic signed [127:0] acc_ref [2][NS];
  logic signed [31:0]  y_ref   [2][NS];
  logic signed [15:0]  bcoef   [2][FIR_TAPS];
  logic signed [15:0]  cmain   [FIR_TAPS];
  logic signed [15:0]  clobe   [FIR_TAPS];
  int                  shift_p [2];
  logic [1:0]          thr_ref [NS];
  logic signed [31:0]  thl_act [2], thl_deact [2];

  function automatic longint cic_weight(input int lag);
    longint w;
    w = 0;
    for (int a = 0; a < 16; a++)
      for (int b = 0; b < 16; b++) begin
        int c;
        c = lag - a - b;
        if (c >= 0 && c < 16) w++;
      end
    return w;
  endfunction

  function automatic logic signed [31:0] scale(input logic signed [127:0] acc, input int sh);
    logic signed [255:0] w;
    w = 256'(acc);
    w = w <<< sh;
    w = w >>> 40;
    if (w > 256'sd2147483647)  return 32'sh7FFF_FFFF;
    if (w < -256'sd2147483648) return 32'sh8000_0000;
    return w[31:0];
  endfunction

  task automatic compute_ds();
    longint wp [46];
    for (int l = 0; l < 46; l++) wp[l] = cic_weight(l);
    for (int pass = 0; pass < 2; pass++) begin
      use_noise = (pass == 0);
      for (int k = 0; k < NS; k++) begin
        longint s [2];
        for (int ch = 0; ch < 2; ch++) begin
          s[ch] = 0;
          for (int l = 0; l < 46; l++) if (16*k + 15 - l >= 0) s[ch] += wp[l] * longint'(phonon_in(ch, 16*k + 15 - l));
        end
        if (pass == 0) begin ds[0][k] = s[0]; ds[1][k] = s[1]; end
        else ds_nf[k] = s[0] + s[1];
      end
    end
    use_noise = 1;
  endtask

  // FIR sum at sample k of coefficient set c over the noisy (nf = 0) or
  // noise-free (nf = 1) linear combination ch0 + ch1
  function automatic real dot(input logic signed [15:0] c [FIR_TAPS], input int k, input bit nf);
    real a;
    a = 0;
    for (int i = 0; i < FIR_TAPS && i <= k; i++)
      if (c[i] != 0) a += real'(c[i]) * real'(nf ? ds_nf[k-i] : ds[0][k-i] + ds[1][k-i]);
    return a;
  endfunction

  task automatic compute_fir();
    for (int p = 0; p < 2; p++)
      for (int k = 0; k < NS; k++) begin
        logic signed [127:0] a;
        a = 0;
        for (int i = 0; i < FIR_TAPS && i <= k; i++)
          if (bcoef[p][i] != 0) a += 128'(bcoef[p][i]) * 128'(ds[0][k-i] + ds[1][k-i]);
        acc_ref[p][k] = a;
      end
  endtask

  // make the taps sum to zero by spreading the excess over all taps
  task automatic zero_dc(inout logic signed [15:0] c [FIR_TAPS]);
    longint s;
    int q, r;
    s = 0;
    for (int i = 0; i < FIR_TAPS; i++) s += longint'(c[i]);
    q = int'(s / FIR_TAPS);
    r = int'(s - longint'(q) * FIR_TAPS);
    for (int i = 0; i < FIR_TAPS; i++) c[i] = 16'(int'(c[i]) - q);
    for (int i = 0; i < (r < 0 ? -r : r); i++) c[2 * i] = 16'(int'(c[2 * i]) - (r < 0 ? -1 : 1));
  endtask

  function automatic real std_y(input int p);
    real s, s2;
    s = 0; s2 = 0;
    for (int k = Q0; k < Q1; k++) begin
      s += real'(y_ref[p][k]); s2 += real'(y_ref[p][k]) * real'(y_ref[p][k]);
    end
    s = s / (Q1 - Q0);
    return $sqrt(s2 / (Q1 - Q0) - s * s);
  endfunction

  // expected primitives (ThL t watches path t; TrL0/1 as described above)
  primitive_t exp_prim[$];
  logic [7:0] exp_dec[$];

  task automatic compute_triggers();
    bit st [2];
    bit inw [2];
    int m_k [2];
    logic [7:0] orb [2];
    for (int t = 0; t < 2; t++) begin st[t] = 0; inw[t] = 0; end
    for (int k = 0; k < NS; k++) begin
      for (int t = 0; t < 2; t++) begin
        if (!st[t] && y_ref[t][k] > thl_act[t]) st[t] = 1;
        else if (st[t] && y_ref[t][k] < thl_deact[t]) st[t] = 0;
        thr_ref[k][t] = st[t];
      end
      for (int p = 0; p < 2; p++) begin
        if (thr_ref[k][p]) begin
          if (!inw[p]) begin inw[p] = 1; m_k[p] = k; orb[p] = {6'b0, thr_ref[k]}; end
          else begin
            orb[p] |= {6'b0, thr_ref[k]};
            if (y_ref[p][k] > y_ref[p][m_k[p]]) m_k[p] = k;
          end
        end else if (inw[p]) begin
          primitive_t e;
          logic [7:0] dec;
          inw[p] = 0;
          e.path = 2'(p);
          e.amplitude = y_ref[p][m_k[p]];
          e.peak_thr = {6'b0, thr_ref[m_k[p]]};
          e.window_thr = orb[p];
          e.timestamp = 32'(m_k[p]);        // sat_len is set above any window
          dec = '0;
          dec[0] = (p == 0) && e.peak_thr[0];
          dec[1] = (p == 0) && e.peak_thr[0] && e.window_thr[1];
          if (dec != 0) begin exp_prim.push_back(e); exp_dec.push_back(dec); end
        end
      end
    end
  endtask

  // ---------------- Avalon-MM access ------------------------------------------------
  semaphore bus = new(1);
  task automatic wr(input logic [15:0] a, input logic [31:0] d);
    bus.get(1);
    @(negedge clk); avs_address = a; avs_writedata = d; avs_write = 1;
    @(negedge clk); avs_write = 0;
    bus.put(1);
  endtask
  task automatic rd(input logic [15:0] a, output logic [31:0] d);
    bus.get(1);
    @(negedge clk); avs_address = a; avs_read = 1;
    @(negedge clk); avs_read = 0;
    d = avs_readdata;
    bus.put(1);
  endtask

  // ---------------- ADC drivers ---------------------------------------------------
  int cyc = 0;
  bit feeding = 0;
  int k_fed = 0;
  always @(negedge clk) begin
    adc_p_valid <= '0;
    adc_c_valid <= '0;
    if (feeding) begin
      for (int g = 0; g < 3; g++)
        if (cyc % PER_P == 3 * g && cyc / PER_P < 16 * NS) begin
          adc_p_valid[g] <= 1'b1;
          for (int c = 0; c < 4; c++) adc_p_data[4*g + c] <= 16'(phonon_in(4*g + c, cyc / PER_P));
        end
      for (int g = 0; g < 2; g++)
        if (cyc % PER_C == 1 + g && cyc / PER_C < 64 * NS) begin
          adc_c_valid[g] <= 1'b1;
          for (int c = 0; c < 2; c++) adc_c_data[2*g + c] <= '0;
        end
      cyc <= cyc + 1;
      k_fed <= cyc / (16 * PER_P);
    end
  end

  // ---------------- readout ---------------------------------------------------------
  primitive_t got_prim[$];
  logic [7:0] got_dec[$];
  bit stop_reader = 0;
  initial begin
    forever begin
      logic [31:0] w0, w1, w2;
      @(negedge clk);
      if (stop_reader) break;
      if (trig_available) begin
        primitive_t e;
        rd(16'h1101, w0); rd(16'h1102, w1); rd(16'h1103, w2);
        e.amplitude = w0; e.timestamp = w1;
        e.path = w2[25:24]; e.window_thr = w2[15:8]; e.peak_thr = w2[7:0];
        got_prim.push_back(e); got_dec.push_back(w2[23:16]);
      end
    end
  end

  // stored entries with decision bit l and timestamp in [t0, t1]
  function automatic int n_in(input int l, input int t0, input int t1);
    int n;
    n = 0;
    for (int i = 0; i < got_prim.size(); i++)
      if (int'(got_prim[i].timestamp) >= t0 && int'(got_prim[i].timestamp) <= t1 && got_dec[i][l]) n++;
    return n;
  endfunction

  // ---------------- main sequence ------------------------------------------------------
  initial begin
    logic [31:0] d;
    int mpk, skipped, kq, ke;
    int eff [2][NAMP];
    int tot [2];
    real tmax, sig_main, l_unit, h, sd [2];
    ext_veto = 0; avs_read = 0; avs_write = 0; avs_address = 0; avs_writedata = 0;
    adc_p_valid = 0; adc_c_valid = 0; adc_p_data = '0; adc_c_data = '0;

    // template, noise and pulse list
    tmax = 0;
    for (int t = 0; t < TLEN; t++) begin
      shape[t] = $exp(-real'(t) / 192.0) - $exp(-real'(t) / 24.0);
      if (shape[t] > tmax) tmax = shape[t];
    end
    for (int t = 0; t < TLEN; t++) shape[t] = shape[t] / tmax;
    for (int ch = 0; ch < 2; ch++)
      for (int j = 0; j < 16 * NS; j++) noise[ch][j] = int'($urandom_range(2 * NOISE)) - NOISE;
    sigma_n = real'(NOISE) / $sqrt(3.0);
    for (int i = 0; i < NSMALL; i++) begin
      pulse_k[i] = SMALL0 + SMALL_GAP * i;
      pulse_a[i] = amp_small[i % NAMP] * sigma_n;
    end
    for (int i = 0; i < NBIG; i++) begin
      pulse_k[NSMALL + i] = BIG0 + BIG_GAP * i;
      pulse_a[NSMALL + i] = amp_big[i] * sigma_n;
    end

    $display("computing reference ...");
    compute_ds();

    // coefficient sets; T[m] = template at downsampled sample m
    mpk = 0;
    for (int m = 0; m < TLEN / 16; m++) if (shape[16 * m + 8] > shape[16 * mpk + 8]) mpk = m;
    for (int i = 0; i < FIR_TAPS; i++) begin cmain[i] = 0; clobe[i] = 0; bcoef[1][i] = 0; end
    for (int m = 0; m < TLEN / 16; m++) cmain[C0 - m] = 16'(int'(18000.0 * shape[16 * m + 8]));
    for (int i = -4; i <= 4; i++) begin
      clobe[C0 - mpk + i - 260] = 16'sd3000;  clobe[C0 - mpk + i + 260] = 16'sd3000;
      clobe[C0 - mpk + i - 130] = -16'sd2000; clobe[C0 - mpk + i + 130] = -16'sd2000;
    end
    for (int i = -2; i <= 2; i++) bcoef[1][C0 - mpk + i] = 16'sd30000;
    zero_dc(cmain);
    zero_dc(bcoef[1]);

    // lobe height: echo of the first 100 sigma_n pulse = 2 x (5 sigma)
    begin
      real s, s2, v;
      s = 0; s2 = 0;
      for (int k = Q0; k < Q1; k++) begin v = dot(cmain, k, 0); s += v; s2 += v * v; end
      s = s / (Q1 - Q0);
      sig_main = $sqrt(s2 / (Q1 - Q0) - s * s);
    end
    // at the echo times the main lobe's zero-sum offset pulls the output
    // negative; the side lobes must lift both echoes to 10 sigma
    kq = BIG0 - 100;
    h = 0;
    for (int sgn = -1; sgn <= 1; sgn += 2) begin
      real base_m, base_l, best, v, hs;
      int kb;
      ke = BIG0 + 2 * BIG_GAP + C0 + sgn * 260;
      base_m = dot(cmain, kq, 1);
      base_l = dot(clobe, kq, 1);
      l_unit = 0; kb = ke;
      for (int k = ke - 6; k <= ke + 6; k++) begin
        v = dot(clobe, k, 1) - base_l;
        if (v > l_unit) begin l_unit = v; kb = k; end
      end
      best = dot(cmain, kb, 1) - base_m;
      hs = (2.0 * 5.0 * sig_main - best) / l_unit;
      if (hs > h) h = hs;
    end
    if (h > 3.0) h = 3.0;
    for (int i = 0; i < FIR_TAPS; i++) bcoef[0][i] = 16'(int'(cmain[i]) + int'(h * real'(clobe[i])));
    zero_dc(bcoef[0]);
    $display("template peak at sample %0d; side-lobe height %0d (of main lobe peak 18000)", mpk, int'(h * 3000.0));

    compute_fir();
    for (int p = 0; p < 2; p++) begin
      longint m;
      m = 1;
      for (int k = Q0; k < NS; k++) begin
        longint v;
        v = longint'(acc_ref[p][k]);
        if (v < 0) v = -v;
        if (v > m) m = v;
      end
      shift_p[p] = 40 + 30 - $clog2(m);
      for (int k = 0; k < NS; k++) y_ref[p][k] = scale(acc_ref[p][k], shift_p[p]);
      sd[p] = std_y(p);
    end
    thl_act[0] = 32'(int'(5.0 * sd[0]));  thl_deact[0] = 0;
    thl_act[1] = 32'(int'(2.5 * sd[1]));  thl_deact[1] = 0;
    $display("shifts %0d %0d; noise sigma %.0f %.0f; activation %0d %0d", shift_p[0], shift_p[1], sd[0], sd[1], thl_act[0], thl_act[1]);
    compute_triggers();
    $display("expected %0d stored triggers", exp_prim.size());

    // reset and configure
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int p = 0; p < NUM_PATHS; p++) begin
      if (p < 2) begin
        for (int i = 0; i < FIR_TAPS; i++) wr(16'(p * 1024 + i), 32'($signed(bcoef[p][i])));
        wr(16'h1000 + 16'(16 * p), 32'd1);
        wr(16'h1001 + 16'(16 * p), 32'd1);
        wr(16'h1040 + 16'(p), 32'(shift_p[p]));
      end
      wr(16'h1070 + 16'(4 * p), 32'(NS));
    end
    for (int t = 0; t < NUM_THL; t++) begin
      wr(16'h1050 + 16'(4 * t), 32'(t % 4));
      wr(16'h1051 + 16'(4 * t), t < 2 ? thl_act[t] : 32'h7FFF_FFFF);
      wr(16'h1052 + 16'(4 * t), t < 2 ? thl_deact[t] : 32'h7FFF_FFFF);
    end
    for (int l = 0; l < NUM_TRL; l++)
      for (int p = 0; p < 4; p++) begin
        logic [15:0] o, z;
        o = 16'h0001; z = 16'h0001;                      // path disabled
        if (l == 0 && p == 0) begin o = 16'h0001; z = 16'h0000; end
        if (l == 1 && p == 0) begin o = 16'h0201; z = 16'h0000; end
        wr(16'h1080 + 16'(16 * l + 2 * p), 32'(o));
        wr(16'h1081 + 16'(16 * l + 2 * p), 32'(z));
      end

    feeding = 1;
    wait (k_fed >= NS);
    repeat (3000) @(negedge clk);
    while (trig_available) @(negedge clk);
    repeat (20) @(negedge clk);
    stop_reader = 1;
    repeat (5) @(negedge clk);

    // bit-exact comparison with the model
    skipped = 0;
    begin
      int j;
      j = 0;
      for (int i = 0; i < got_prim.size(); i++) begin
        while (j < exp_prim.size() && !(exp_prim[j] == got_prim[i] && exp_dec[j] == got_dec[i])) begin j++; skipped++; end
        checks++;
        if (j >= exp_prim.size()) begin
          failures++;
          $display("FAIL readout %0d not expected: path %0d amp %0d ts %0d thr %h/%h dec %h", i, got_prim[i].path,
                   $signed(got_prim[i].amplitude), got_prim[i].timestamp, got_prim[i].peak_thr, got_prim[i].window_thr, got_dec[i]);
        end else j++;
      end
      skipped += exp_prim.size() - j;
    end
    check(skipped == 0, $sformatf("%0d expected triggers missing", skipped));
    rd(16'h1108, d); check(d == 0, "lost count");
    rd(16'h1107, d); check(d == 0, $sformatf("error flags %b", d));
    $display("read %0d triggers", got_prim.size());

    // efficiency turn-on
    for (int a = 0; a < NAMP; a++) begin eff[0][a] = 0; eff[1][a] = 0; end
    for (int i = 0; i < NSMALL; i++) begin
      int tm;
      tm = pulse_k[i] + C0;
      for (int l = 0; l < 2; l++) eff[l][i % NAMP] += n_in(l, tm - 8, tm + 8);
    end
    $display("amplitude [sigma_n]   OF alone   OF + boxcar   (triggers per %0d pulses)", NREP);
    for (int a = 0; a < NAMP; a++) $display("  %4.1f                %3d         %3d", amp_small[a], eff[0][a], eff[1][a]);
    tot[0] = 0; tot[1] = 0;
    for (int a = 0; a < NAMP; a++) begin
      tot[0] += eff[0][a]; tot[1] += eff[1][a];
      if (a > 0) for (int l = 0; l < 2; l++)
        check(eff[l][a] >= eff[l][a-1] - 1, $sformatf("rule %0d efficiency falls at %.1f sigma_n", l, amp_small[a]));
    end
    for (int l = 0; l < 2; l++) begin
      check(eff[l][0] == 0, $sformatf("rule %0d triggers at %.1f sigma_n", l, amp_small[0]));
      check(eff[l][NAMP-1] == NREP, $sformatf("rule %0d misses pulses at %.1f sigma_n", l, amp_small[NAMP-1]));
    end
    check(tot[1] >= tot[0] - 2, $sformatf("boxcar rule costs %0d of %0d small-pulse triggers", tot[0] - tot[1], tot[0]));
    // echo region: all triggers within +-300 samples of the main one
    for (int i = 0; i < NBIG; i++) begin
      int tm, n0, n1;
      tm = pulse_k[NSMALL + i] + C0;
      n0 = n_in(0, tm - 300, tm + 300);
      n1 = n_in(1, tm - 300, tm + 300);
      $display("  %5.1f                %3d         %3d   (triggers per pulse)", amp_big[i], n0, n1);
      if (amp_big[i] == 10.0)  check(n0 == 1 && n1 == 1, $sformatf("10 sigma_n pulse %0d: %0d / %0d triggers", i, n0, n1));
      if (amp_big[i] == 100.0) check(n0 == 3 && n1 == 1, $sformatf("100 sigma_n pulse %0d: %0d / %0d triggers", i, n0, n1));
      if (amp_big[i] == 100.0) begin
        check(n_in(0, tm - 272, tm - 248) == 1, "echo before the pulse");
        check(n_in(0, tm + 248, tm + 272) == 1, "echo after the pulse");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NS * 16 * PER_P + 200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
