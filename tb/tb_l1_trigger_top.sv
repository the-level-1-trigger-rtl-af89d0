// tb_l1_trigger_top: end-to-end test of the level-1 trigger at full size
// (1024-tap FIRs, 256-entry trigger FIFO, all default parameters).
//
// Stimulus, in downsampled-sample units k (39.0625 kHz; the ADC strobes run at
// one phonon sample per 68 clocks and one charge sample per 17 clocks):
//  * phonon channels 0 and 1 carry the same rectangular pulses, small and
//    large, as from a pulse generator feeding two channels;
//  * charge channel 12 carries one long full-scale pulse and one short pulse;
//  * charge channel 13 carries a square wave (2 samples high, 2 low) that
//    produces a trigger every 4 samples.
// Configuration (written over Avalon-MM):
//  * path 0 "optimal-filter-like": a 5-tap main lobe with positive side lobes
//    130 samples before/after it and negative lobes between, on ch0 + ch1;
//  * path 1 boxcar of width 5 on ch0 + ch1;
//  * path 2 short boxcar on ch12 with a large shift, so it saturates;
//  * path 3 single tap on ch13.
//  * ThL0..3 watch paths 0..3; TrL0 = path 0 alone, TrL1 = path 0 requiring
//    the boxcar threshold at the peak (echo suppression), TrL2 = path 3 with
//    50 % prescale, TrL3 = path 2, TrL4 = path 3, TrL5 = path 0 requiring the
//    boxcar threshold to stay 0 (selects echoes only), TrL6 = path 1,
//    TrL7 disabled.
// The FIFO is not read while the square wave runs, so it fills; an external
// veto is raised later. Expected primitives and decisions come from a
// behavioural model of the whole chain computed here from the stimulus
// (three-fold boxcar for the CIC, sums for LC and FIR, scaling, hysteresis,
// window scan, mask rules, and the same LFSR and seeds for the prescale). The
// readout must equal the expected list with exactly lost_count entries
// missing. Every mechanism (echo triggers, echo suppression, FIR saturation,
// saturated-pulse timestamp, prescale rejection, FIFO full, lost triggers,
// external veto) is counted and must occur.
module tb_l1_trigger_top;
  import l1_pkg::*;

  localparam int NS      = 2100;           // downsampled samples
  localparam int PER_P   = 68;             // clocks per phonon sample
  localparam int PER_C   = 17;             // clocks per charge sample
  localparam int READ_OFF_BEGIN = 810, READ_OFF_END = 1960;
  localparam int VETO_BEGIN = 1975, VETO_END = 1995;

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

  // ---------------- stimulus as functions of the raw sample index ----------
  function automatic int phonon_in(input int ch, input int j);
    int k;
    k = j / 16;
    if (ch > 1) return 0;
    // main response 150 samples later, side lobes at +20 and +280
    if (k >= 50   && k < 53)   return 300;     // small pulses
    if (k >= 700  && k < 703)  return 300;
    if (k >= 1100 && k < 1103) return 300;
    if (k >= 1250 && k < 1253) return 300;
    if (k >= 1700 && k < 1703) return 300;
    if (k >= 400  && k < 403)  return 30000;   // large pulses
    if (k >= 1400 && k < 1403) return 30000;
    return 0;
  endfunction

  function automatic int charge_in(input int ch, input int j);
    int k;
    k = j / 64;
    if (ch == 0) begin                        // channel 12
      if (k >= 600 && k < 625) return 65535;
      if (k == 700) return 3000;
      return 0;
    end
    if (ch == 1) begin                        // channel 13
      if (k >= 800 && k < 2050 && (k / 2) % 2 == 0) return 1000;
      return 0;
    end
    return 0;
  endfunction

  // ---------------- reference model ----------------------------------------
  longint ds [NUM_CH][NS];
  logic signed [127:0] acc_ref [NUM_PATHS][NS];
  logic signed [31:0]  y_ref   [NUM_PATHS][NS];
  logic signed [15:0]  bcoef   [NUM_PATHS][FIR_TAPS];
  logic signed [7:0]   lcoef   [NUM_PATHS][NUM_CH];
  int                  shift_p [NUM_PATHS];
  logic [7:0]          thr_ref [NS];
  int                  thl_sel [NUM_THL];
  logic signed [31:0]  thl_act [NUM_THL], thl_deact [NUM_THL];
  logic [3:0][15:0]    req1 [NUM_TRL], req0 [NUM_TRL];
  logic [15:0]         rej [NUM_TRL];
  int                  sat_len [NUM_PATHS], sat_off [NUM_PATHS];

  function automatic longint cic_weight(input int R, input int lag);
    longint w;
    w = 0;
    for (int a = 0; a < R; a++)
      for (int b = 0; b < R; b++) begin
        int c;
        c = lag - a - b;
        if (c >= 0 && c < R) w++;
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

  task automatic compute_downsampled();
    longint wp [48], wc [192];
    for (int l = 0; l < 46; l++)  wp[l] = cic_weight(16, l);
    for (int l = 0; l < 190; l++) wc[l] = cic_weight(64, l);
    for (int ch = 0; ch < NUM_CH; ch++)
      for (int k = 0; k < NS; k++) begin
        longint s;
        s = 0;
        if (ch < 12) begin
          for (int l = 0; l < 46; l++) if (16*k + 15 - l >= 0) s += wp[l] * longint'(phonon_in(ch, 16*k + 15 - l));
        end else begin
          for (int l = 0; l < 190; l++) if (64*k + 63 - l >= 0) s += wc[l] * longint'(charge_in(ch - 12, 64*k + 63 - l));
        end
        ds[ch][k] = s;
      end
  endtask

  task automatic compute_fir();
    for (int p = 0; p < NUM_PATHS; p++) begin
      longint lc [NS];
      for (int k = 0; k < NS; k++) begin
        lc[k] = 0;
        for (int c = 0; c < NUM_CH; c++) lc[k] += longint'(lcoef[p][c]) * ds[c][k];
      end
      for (int k = 0; k < NS; k++) begin
        logic signed [127:0] a;
        a = 0;
        for (int i = 0; i < FIR_TAPS && i <= k; i++)
          if (bcoef[p][i] != 0) a += 128'(bcoef[p][i]) * 128'(lc[k-i]);
        acc_ref[p][k] = a;
      end
    end
  endtask

  function automatic longint max_abs_acc(input int p, input int k0, input int k1);
    longint m;
    m = 0;
    for (int k = k0; k < k1; k++) begin
      longint v;
      v = longint'(acc_ref[p][k]);
      if (v < 0) v = -v;
      if (v > m) m = v;
    end
    return m;
  endfunction

  function automatic int max_y(input int p, input int k0, input int k1);
    int m;
    m = -2147483647;
    for (int k = k0; k < k1; k++) if (int'(y_ref[p][k]) > m) m = int'(y_ref[p][k]);
    return m;
  endfunction

  // expected primitives
  primitive_t exp_prim[$];
  logic [7:0] exp_dec[$];
  int n_echo_only = 0, n_echo_suppressed = 0, n_sat_rule = 0, n_amp_sat = 0, n_prescale_rej = 0, n_prescale_acc = 0;

  task automatic compute_triggers();
    bit st [NUM_THL];
    bit inw [NUM_PATHS];
    int s_k [NUM_PATHS], m_k [NUM_PATHS];
    logic [7:0] orb [NUM_PATHS];
    logic [31:0] lfsr [NUM_TRL];
    for (int l = 0; l < NUM_TRL; l++) lfsr[l] = 32'h1234_5679 + 32'(l) * 32'h0101_0101;
    for (int t = 0; t < NUM_THL; t++) st[t] = 0;
    for (int p = 0; p < NUM_PATHS; p++) inw[p] = 0;
    for (int k = 0; k < NS; k++) begin
      for (int t = 0; t < NUM_THL; t++) begin
        logic signed [31:0] y;
        y = y_ref[thl_sel[t]][k];
        if (!st[t] && y > thl_act[t]) st[t] = 1;
        else if (st[t] && y < thl_deact[t]) st[t] = 0;
        thr_ref[k][t] = st[t];
      end
      for (int p = 0; p < NUM_PATHS; p++) begin
        logic [7:0] assoc;
        for (int t = 0; t < NUM_THL; t++) assoc[t] = (thl_sel[t] == p);
        if ((thr_ref[k] & assoc) != 0) begin
          if (!inw[p]) begin inw[p] = 1; s_k[p] = k; m_k[p] = k; orb[p] = thr_ref[k]; end
          else begin
            orb[p] |= thr_ref[k];
            if (y_ref[p][k] > y_ref[p][m_k[p]]) m_k[p] = k;
          end
        end else if (inw[p]) begin
          primitive_t e;
          logic [7:0] dec;
          inw[p] = 0;
          e.path = 2'(p);
          e.amplitude = y_ref[p][m_k[p]];
          e.peak_thr = thr_ref[m_k[p]];
          e.window_thr = orb[p];
          if (k - s_k[p] > sat_len[p]) begin e.timestamp = 32'(s_k[p] + sat_off[p]); n_sat_rule++; end
          else e.timestamp = 32'(m_k[p]);
          if (e.amplitude == 32'sh7FFF_FFFF) n_amp_sat++;
          // trigger logic (primitives of one sample leave in path order)
          for (int l = 0; l < NUM_TRL; l++) begin
            logic [15:0] bits, o, z;
            bit rule;
            bits = {e.window_thr, e.peak_thr};
            o = req1[l][p]; z = req0[l][p];
            rule = ((bits & o) == o) && ((bits & z) == 0);
            dec[l] = rule && (lfsr[l][15:0] >= rej[l]);
            if (l == 2 && rule) begin if (dec[l]) n_prescale_acc++; else n_prescale_rej++; end
            lfsr[l] = lfsr[l][0] ? ((lfsr[l] >> 1) ^ 32'h8020_0003) : (lfsr[l] >> 1);
          end
          if (p == 0 && dec[0] && !dec[1]) n_echo_suppressed++;
          if (p == 0 && dec[5]) n_echo_only++;
          if (dec != 0) begin exp_prim.push_back(e); exp_dec.push_back(dec); end
        end
      end
    end
  endtask

  // ---------------- Avalon-MM access ----------------------------------------
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

  // ---------------- ADC drivers ------------------------------------------------
  int cyc = 0;
  bit feeding = 0;
  int k_fed = 0;            // downsampled samples fully fed
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
          for (int c = 0; c < 2; c++) adc_c_data[2*g + c] <= 16'(charge_in(2*g + c, cyc / PER_C));
        end
      cyc <= cyc + 1;
      k_fed <= cyc / (16 * PER_P);
    end
  end

  // ---------------- readout ------------------------------------------------------
  primitive_t got_prim[$];
  logic [7:0] got_dec[$];
  bit read_en = 1, stop_reader = 0;
  int n_full_seen = 0;
  initial begin
    forever begin
      logic [31:0] cnt, w0, w1, w2;
      @(negedge clk);
      if (stop_reader) break;
      if (read_en && trig_available) begin
        primitive_t e;
        rd(16'h1101, w0); rd(16'h1102, w1); rd(16'h1103, w2);
        e.amplitude = w0; e.timestamp = w1;
        e.path = w2[25:24]; e.window_thr = w2[15:8]; e.peak_thr = w2[7:0];
        got_prim.push_back(e); got_dec.push_back(w2[23:16]);
      end
    end
  end

  always @(posedge clk) if (rst_n && dut.trig_count == 9'd256) n_full_seen++;

  // ---------------- main sequence ------------------------------------------------
  initial begin
    logic [31:0] d;
    int small_peak0, small_peak1, skipped, n_ext_begin, n_full_begin;
    ext_veto = 0; avs_read = 0; avs_write = 0; avs_address = 0; avs_writedata = 0;
    adc_p_valid = 0; adc_c_valid = 0; adc_p_data = '0; adc_c_data = '0;

    // configuration values
    for (int p = 0; p < NUM_PATHS; p++) begin
      for (int i = 0; i < FIR_TAPS; i++) bcoef[p][i] = 0;
      for (int c = 0; c < NUM_CH; c++) lcoef[p][c] = 0;
      sat_len[p] = 1000; sat_off[p] = 0;
    end
    lcoef[0][0] = 1; lcoef[0][1] = 1; lcoef[1][0] = 1; lcoef[1][1] = 1;
    lcoef[2][12] = 1; lcoef[3][13] = 1;
    for (int i = 0; i < 5; i++) begin
      bcoef[0][150 + i] = 16'sd20000;              // main lobe
      bcoef[0][20 + i]  = 16'sd5000;               // positive side lobes
      bcoef[0][280 + i] = 16'sd5000;
      bcoef[0][85 + i]  = -16'sd4000;              // negative lobes
      bcoef[0][215 + i] = -16'sd4000;
      bcoef[1][150 + i] = 16'sd20000;              // boxcar, width 5
    end
    for (int i = 0; i < 4; i++) bcoef[2][i] = 16'sd30000;
    bcoef[3][0] = 16'sd1;
    sat_len[2] = 8; sat_off[2] = 5;

    $display("computing reference ...");
    compute_downsampled();
    compute_fir();
    // shifts: paths 0/1 so the largest pulse uses ~30 bits; path 2 saturates
    for (int p = 0; p < 2; p++) begin
      longint m;
      m = max_abs_acc(p, 0, NS);
      shift_p[p] = 40 + 30 - $clog2(m);
    end
    shift_p[2] = 22;
    shift_p[3] = 40 + 30 - $clog2(max_abs_acc(3, 0, NS));
    for (int p = 0; p < NUM_PATHS; p++)
      for (int k = 0; k < NS; k++) y_ref[p][k] = scale(acc_ref[p][k], shift_p[p]);
    // thresholds from the reference signal size
    small_peak0 = max_y(0, 190, 230);
    small_peak1 = max_y(1, 190, 230);
    for (int t = 0; t < NUM_THL; t++) begin
      thl_sel[t] = t % 4; thl_act[t] = 32'sh7FFF_FFFF; thl_deact[t] = 32'sh7FFF_FFFF;
    end
    thl_act[0] = small_peak0 / 2;  thl_deact[0] = small_peak0 / 8;
    thl_act[1] = small_peak1 / 4;  thl_deact[1] = small_peak1 / 16;
    thl_act[2] = 1000000;          thl_deact[2] = 500000;
    begin
      int hi, lo;
      hi = max_y(3, 900, 1000);
      lo = hi;
      for (int k = 900; k < 1000; k++) if (int'(y_ref[3][k]) < lo) lo = int'(y_ref[3][k]);
      thl_act[3] = lo + (hi - lo) * 2 / 3; thl_deact[3] = lo + (hi - lo) / 3;
      $display("square wave FIR output %0d..%0d", lo, hi);
    end
    $display("shifts %0d %0d %0d %0d, small peaks %0d %0d", shift_p[0], shift_p[1], shift_p[2], shift_p[3], small_peak0, small_peak1);
    // trigger logic masks: contradictory masks disable a path
    for (int l = 0; l < NUM_TRL; l++) begin
      for (int p = 0; p < 4; p++) begin req1[l][p] = 16'h0001; req0[l][p] = 16'h0001; end
      rej[l] = 0;
    end
    req1[0][0] = 16'h0001;             req0[0][0] = 16'h0000;   // OF alone
    req1[1][0] = 16'h0003;             req0[1][0] = 16'h0000;   // OF and BF at the peak
    req1[2][3] = 16'h0800;             req0[2][3] = 16'h0000;   rej[2] = 16'h8000; // square wave, 50 % prescale
    req1[6][1] = 16'h0002;             req0[6][1] = 16'h0000;   // boxcar alone
    req1[3][2] = 16'h0400;             req0[3][2] = 16'h0000;   // window ThL2
    req1[4][3] = 16'h0800;             req0[4][3] = 16'h0000;   // window ThL3
    req1[5][0] = 16'h0001;             req0[5][0] = 16'h0200;   // OF with BF never active
    compute_triggers();
    $display("expected: %0d stored triggers, echoes %0d, suppressed %0d, saturated rule %0d, amplitude saturated %0d, prescale %0d/%0d",
             exp_prim.size(), n_echo_only, n_echo_suppressed, n_sat_rule, n_amp_sat, n_prescale_acc, n_prescale_rej);

    // reset and configure
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int p = 0; p < NUM_PATHS; p++) begin
      for (int i = 0; i < FIR_TAPS; i++) wr(16'(p * 1024 + i), 32'($signed(bcoef[p][i])));
      for (int c = 0; c < NUM_CH; c++) wr(16'h1000 + 16'(16 * p + c), 32'($signed(lcoef[p][c])));
      wr(16'h1040 + 16'(p), 32'(shift_p[p]));
      wr(16'h1070 + 16'(4 * p), 32'(sat_len[p]));
      wr(16'h1071 + 16'(4 * p), 32'(sat_off[p]));
    end
    for (int t = 0; t < NUM_THL; t++) begin
      wr(16'h1050 + 16'(4 * t), 32'(thl_sel[t]));
      wr(16'h1051 + 16'(4 * t), thl_act[t]);
      wr(16'h1052 + 16'(4 * t), thl_deact[t]);
    end
    for (int l = 0; l < NUM_TRL; l++) begin
      for (int p = 0; p < 4; p++) begin
        wr(16'h1080 + 16'(16 * l + 2 * p), 32'(req1[l][p]));
        wr(16'h1081 + 16'(16 * l + 2 * p), 32'(req0[l][p]));
      end
      wr(16'h1088 + 16'(16 * l), 32'(rej[l]));
    end
    rd(16'h1051, d); check(d == thl_act[0], "config read-back");

    // run
    feeding = 1;
    wait (k_fed >= READ_OFF_BEGIN); read_en = 0;
    wait (k_fed >= READ_OFF_END);   read_en = 1;
    wait (k_fed >= VETO_BEGIN);     ext_veto = 1;
    wait (k_fed >= VETO_END);       ext_veto = 0;
    wait (k_fed >= NS);
    repeat (3000) @(negedge clk);
    while (trig_available) @(negedge clk);
    repeat (20) @(negedge clk);
    stop_reader = 1;
    repeat (5) @(negedge clk);

    // compare readout with the expected list; skipped entries are the lost ones
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
    rd(16'h1108, d);
    $display("read %0d triggers, expected %0d, lost %0d, skipped %0d", got_prim.size(), exp_prim.size(), d, skipped);
    check(d == 32'(skipped), "lost count equals missing triggers");
    check(d > 0, "no trigger lost");
    rd(16'h1107, d); check(d == 0, $sformatf("error flags %b", d));
    // veto records
    n_ext_begin = 0; n_full_begin = 0;
    begin
      logic [31:0] nv, ts_b;
      rd(16'h1104, nv);
      for (int i = 0; i < int'(nv); i++) begin
        logic [31:0] t, kd;
        rd(16'h1105, t); rd(16'h1106, kd);
        $display("veto record %0d at %0d", kd, t);
        if (kd == 0) n_full_begin++;
        if (kd == 2) begin n_ext_begin++; ts_b = t; check(t >= VETO_BEGIN - 2 && t <= VETO_BEGIN + 2, "veto begin time"); end
        if (kd == 3) check(t >= VETO_END - 2 && t <= VETO_END + 2, "veto end time");
      end
    end
    begin
      logic [31:0] lt, vt;
      rd(16'h1109, lt); rd(16'h110B, vt);
      check(lt + vt == NS, $sformatf("live %0d + veto %0d != %0d", lt, vt, NS));
      check(vt > 0, "veto time");
    end
    // mechanisms
    $display("mechanisms: echo triggers %0d, echoes suppressed %0d, FIR saturation %0d, saturated-pulse timestamp %0d, prescale rejects %0d accepts %0d, FIFO full clocks %0d, FIFO-full records %0d, external vetoes %0d",
             n_echo_only, n_echo_suppressed, n_amp_sat, n_sat_rule, n_prescale_rej, n_prescale_acc, n_full_seen, n_full_begin, n_ext_begin);
    check(n_echo_only > 0, "echo triggers");
    check(n_echo_suppressed > 0, "echo suppression");
    check(n_amp_sat > 0, "FIR output saturation");
    check(n_sat_rule > 0, "saturated-pulse timestamp rule");
    check(n_prescale_rej > 0 && n_prescale_acc > 0, "prescale");
    check(n_full_seen > 0 && n_full_begin > 0, "trigger FIFO full");
    check(n_ext_begin > 0, "external veto");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NS * 16 * PER_P + 100000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
