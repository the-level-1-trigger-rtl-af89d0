// tb_filter_workloads: the filter families of the trigger studies, run through
// the complete level-1 trigger at full size (all default parameters).
//
// Two phonon channels (0 and 1) carry the same double-exponential pulses,
// A(t) = exp(-t/192) - exp(-t/24) in 625 kHz samples (rise ~40 us, fall
// ~300 us), on a baseline of 4000 counts with independent uniform noise of
// +-3000 counts per sample. Pulses are small (1500 counts) or large (45000
// counts, close to the ADC's full scale). All four trigger paths see ch0 + ch1:
//   path 0  optimal-filter-like: 0.6 x the matched filter plus positive side
//           lobes 260 samples before and after the main lobe (negative lobes
//           at +-130), the shape that produces echo triggers;
//   path 1  matched filter: the downsampled template, time reversed;
//   path 2  boxcar of width 5 around the template maximum;
//   path 3  second optimal-filter-like set with narrower side lobes.
// Every set is scaled to the 16-bit range and offset so its taps sum to zero,
// which cancels the ADC baseline. The main lobes are aligned, so every filter
// peaks C0 = 512 samples after a pulse starts. Thresholds: ThL0..3 on paths
// 0..3 at half the small-pulse response; ThL4 on the matched filter at ten
// times the small response (a high-energy threshold).
// Trigger rules: TrL0 path 0 alone; TrL1 path 0 with the boxcar threshold
// active somewhere in its window (echo suppression); TrL2 matched filter;
// TrL3 boxcar; TrL4 matched filter without the high threshold (keeps only
// low-energy pulses); TrL5 path 0 with the boxcar never active (echoes only);
// TrL6 path 3 alone.
//
// Checks: a bit-exact model of the chain (CIC as a three-fold boxcar, the
// linear combination, the FIR sum, scaling, hysteresis, trigger windows and
// rules) predicts every stored entry, and the readout must match it with none
// lost. Independently of that model, each pulse must give exactly one trigger
// per path near its expected time; the matched filter and the boxcar must give
// nothing else; each large pulse must give the two echo triggers on path 0,
// which the boxcar rule must remove; small pulses must give none; and the
// high-energy rule must keep small and drop large pulses. The testbench also
// prints the response/resolution ratio of each filter measured on the model
// output (white noise here, so it is no comparison with measured detector
// noise). Timing: 80 clocks per phonon sample, 20 per charge sample
// (50 MHz clock, 625 kHz / 2.5 MHz ADCs).
module tb_filter_workloads;
  import l1_pkg::*;

  localparam int NS    = 5900;           // downsampled samples
  localparam int PER_P = 80;
  localparam int PER_C = 20;
  localparam int C0    = 512;            // filter delay (samples)
  localparam int NPULSE = 6;
  localparam int WARM  = 1100;           // FIR buffer filled with baseline
  localparam int TLEN  = 2400;           // template length, raw samples
  localparam int BASE  = 4000, NOISE = 3000;

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
  int pulse_k  [NPULSE] = '{1300, 2000, 2700, 3400, 4100, 4800};  // start, downsampled
  int pulse_a  [NPULSE] = '{1500, 45000, 1500, 45000, 1500, 1500};
  real shape [TLEN];                      // template, peak 1
  int  noise [2][16*NS];

  function automatic int phonon_in(input int ch, input int j);
    real v;
    if (ch > 1) return 0;
    v = real'(BASE + noise[ch][j]);
    for (int p = 0; p < NPULSE; p++) begin
      int d;
      d = j - 16 * pulse_k[p];
      if (d >= 0 && d < TLEN) v += real'(pulse_a[p]) * shape[d];
    end
    if (v > 65535.0) v = 65535.0;
    return int'(v);
  endfunction

  // ---------------- reference model ----------------------------------------------
  longint ds [2][NS];
  logic signed [127:0] acc_ref [NUM_PATHS][NS];
  logic signed [31:0]  y_ref   [NUM_PATHS][NS];
  logic signed [15:0]  bcoef   [NUM_PATHS][FIR_TAPS];
  int                  shift_p [NUM_PATHS];
  logic [7:0]          thr_ref [NS];
  int                  thl_sel [NUM_THL];
  logic signed [31:0]  thl_act [NUM_THL], thl_deact [NUM_THL];
  logic [3:0][15:0]    req1 [NUM_TRL], req0 [NUM_TRL];

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

  task automatic compute_reference();
    longint wp [46];
    for (int l = 0; l < 46; l++) wp[l] = cic_weight(l);
    for (int ch = 0; ch < 2; ch++)
      for (int k = 0; k < NS; k++) begin
        longint s;
        s = 0;
        for (int l = 0; l < 46; l++) if (16*k + 15 - l >= 0) s += wp[l] * longint'(phonon_in(ch, 16*k + 15 - l));
        ds[ch][k] = s;
      end
    for (int p = 0; p < NUM_PATHS; p++)
      for (int k = 0; k < NS; k++) begin
        logic signed [127:0] a;
        a = 0;
        for (int i = 0; i < FIR_TAPS && i <= k; i++)
          a += 128'(bcoef[p][i]) * 128'(ds[0][k-i] + ds[1][k-i]);
        acc_ref[p][k] = a;
      end
  endtask

  // make the taps sum to zero by spreading the excess over all taps
  task automatic zero_dc(input int p);
    longint s;
    int q, r;
    s = 0;
    for (int i = 0; i < FIR_TAPS; i++) s += longint'(bcoef[p][i]);
    q = int'(s / FIR_TAPS);
    r = int'(s - longint'(q) * FIR_TAPS);
    for (int i = 0; i < FIR_TAPS; i++) bcoef[p][i] = 16'(int'(bcoef[p][i]) - q);
    for (int i = 0; i < (r < 0 ? -r : r); i++) bcoef[p][2 * i] = 16'(int'(bcoef[p][2 * i]) - (r < 0 ? -1 : 1));
  endtask

  // expected primitives
  primitive_t exp_prim[$];
  logic [7:0] exp_dec[$];

  task automatic compute_triggers();
    bit st [NUM_THL];
    bit inw [NUM_PATHS];
    int s_k [NUM_PATHS], m_k [NUM_PATHS];
    logic [7:0] orb [NUM_PATHS];
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
          e.timestamp = 32'(m_k[p]);        // sat_len is set above any window
          for (int l = 0; l < NUM_TRL; l++) begin
            logic [15:0] bits, o, z;
            bits = {e.window_thr, e.peak_thr};
            o = req1[l][p]; z = req0[l][p];
            dec[l] = ((bits & o) == o) && ((bits & z) == 0);
          end
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

  // ---------------- helpers on the readout ----------------------------------------
  // entries of path p with decision bit l (l < 0: any) and timestamp in [t0, t1]
  function automatic int n_in(input int p, input int l, input int t0, input int t1);
    int n;
    n = 0;
    for (int i = 0; i < got_prim.size(); i++)
      if (got_prim[i].path == 2'(p) && int'(got_prim[i].timestamp) >= t0 && int'(got_prim[i].timestamp) <= t1 &&
          (l < 0 || got_dec[i][l]))
        n++;
    return n;
  endfunction

  function automatic real std_y(input int p);
    real s, s2;
    int n;
    s = 0; s2 = 0; n = 0;
    for (int k = WARM + 50; k < pulse_k[0]; k++) begin
      s += real'(y_ref[p][k]); s2 += real'(y_ref[p][k]) * real'(y_ref[p][k]); n++;
    end
    s = s / n;
    return $sqrt(s2 / n - s * s);
  endfunction

  // ---------------- main sequence ------------------------------------------------------
  initial begin
    logic [31:0] d;
    int resp_small [NUM_PATHS];
    int mpk, skipped, n_echo, n_supp;
    real tmax, sd_ds [NUM_THL];
    ext_veto = 0; avs_read = 0; avs_write = 0; avs_address = 0; avs_writedata = 0;
    adc_p_valid = 0; adc_c_valid = 0; adc_p_data = '0; adc_c_data = '0;

    // template and noise
    tmax = 0;
    for (int t = 0; t < TLEN; t++) begin
      shape[t] = $exp(-real'(t) / 192.0) - $exp(-real'(t) / 24.0);
      if (shape[t] > tmax) tmax = shape[t];
    end
    for (int t = 0; t < TLEN; t++) shape[t] = shape[t] / tmax;
    for (int ch = 0; ch < 2; ch++)
      for (int j = 0; j < 16 * NS; j++) noise[ch][j] = int'($urandom_range(2 * NOISE)) - NOISE;

    // coefficient sets; T[m] = template at downsampled sample m
    mpk = 0;
    for (int m = 0; m < TLEN / 16; m++) if (shape[16 * m + 8] > shape[16 * mpk + 8]) mpk = m;
    for (int p = 0; p < NUM_PATHS; p++)
      for (int i = 0; i < FIR_TAPS; i++) bcoef[p][i] = 0;
    for (int m = 0; m < TLEN / 16; m++) begin
      real tm;
      tm = shape[16 * m + 8];
      bcoef[1][C0 - m] = 16'(int'(30000.0 * tm));                  // matched
      bcoef[0][C0 - m] = 16'(int'(18000.0 * tm));                  // OF-like main lobe
      bcoef[3][C0 - m] = 16'(int'(18000.0 * tm));
    end
    for (int i = -2; i <= 2; i++) bcoef[2][C0 - mpk + i] = 16'sd30000;   // boxcar, width 5
    for (int i = -4; i <= 4; i++) begin
      int c;
      c = C0 - mpk + i;
      bcoef[0][c - 260] = 16'(int'(bcoef[0][c - 260]) + 6000);
      bcoef[0][c + 260] = 16'(int'(bcoef[0][c + 260]) + 6000);
      bcoef[0][c - 130] = 16'(int'(bcoef[0][c - 130]) - 4000);
      bcoef[0][c + 130] = 16'(int'(bcoef[0][c + 130]) - 4000);
    end
    for (int i = -1; i <= 1; i++) begin
      int c;
      c = C0 - mpk + i;
      bcoef[3][c - 260] = 16'(int'(bcoef[3][c - 260]) + 9000);
      bcoef[3][c + 260] = 16'(int'(bcoef[3][c + 260]) + 9000);
    end
    for (int p = 0; p < NUM_PATHS; p++) zero_dc(p);

    $display("computing reference ...");
    compute_reference();
    for (int p = 0; p < NUM_PATHS; p++) begin
      longint m;
      m = 1;
      for (int k = WARM; k < NS; k++) begin
        longint v;
        v = longint'(acc_ref[p][k]);
        if (v < 0) v = -v;
        if (v > m) m = v;
      end
      shift_p[p] = 40 + 30 - $clog2(m);          // largest pulse uses ~30 bits
      for (int k = 0; k < NS; k++) y_ref[p][k] = scale(acc_ref[p][k], shift_p[p]);
      resp_small[p] = -2147483647;
      for (int k = pulse_k[0] + C0 - 10; k < pulse_k[0] + C0 + 10; k++)
        if (int'(y_ref[p][k]) > resp_small[p]) resp_small[p] = int'(y_ref[p][k]);
    end
    for (int t = 0; t < NUM_THL; t++) begin
      thl_sel[t] = t % 4; thl_act[t] = 32'sh7FFF_FFFF; thl_deact[t] = 32'sh7FFF_FFFF;
    end
    for (int t = 0; t < 4; t++) begin thl_act[t] = resp_small[t] / 2; thl_deact[t] = resp_small[t] / 10; end
    thl_sel[4] = 1; thl_act[4] = resp_small[1] * 10; thl_deact[4] = resp_small[1] * 5;
    $display("template peak at %0d samples; shifts %0d %0d %0d %0d; small-pulse responses %0d %0d %0d %0d",
             mpk, shift_p[0], shift_p[1], shift_p[2], shift_p[3], resp_small[0], resp_small[1], resp_small[2], resp_small[3]);
    for (int p = 0; p < NUM_PATHS; p++) begin
      sd_ds[p] = std_y(p);
      $display("path %0d: response %0d, resolution %.0f, response/resolution %.1f", p, resp_small[p], sd_ds[p], real'(resp_small[p]) / sd_ds[p]);
      check(real'(resp_small[p]) / sd_ds[p] > 6.0, $sformatf("path %0d small pulse well above noise", p));
    end
    for (int l = 0; l < NUM_TRL; l++)
      for (int p = 0; p < 4; p++) begin req1[l][p] = 16'h0001; req0[l][p] = 16'h0001; end
    req1[0][0] = 16'h0001; req0[0][0] = 16'h0000;    // OF-like alone
    req1[1][0] = 16'h0401; req0[1][0] = 16'h0000;    // OF-like with the boxcar active in its window
    req1[2][1] = 16'h0002; req0[2][1] = 16'h0000;    // matched filter
    req1[3][2] = 16'h0004; req0[3][2] = 16'h0000;    // boxcar
    req1[4][1] = 16'h0002; req0[4][1] = 16'h1000;    // matched filter, low energy only
    req1[5][0] = 16'h0001; req0[5][0] = 16'h0400;    // OF-like, boxcar never active
    req1[6][3] = 16'h0008; req0[6][3] = 16'h0000;    // second OF-like set
    compute_triggers();
    $display("expected %0d stored triggers", exp_prim.size());

    // reset and configure
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int p = 0; p < NUM_PATHS; p++) begin
      for (int i = 0; i < FIR_TAPS; i++) wr(16'(p * 1024 + i), 32'($signed(bcoef[p][i])));
      wr(16'h1000 + 16'(16 * p), 32'd1);
      wr(16'h1001 + 16'(16 * p), 32'd1);
      wr(16'h1040 + 16'(p), 32'(shift_p[p]));
      wr(16'h1070 + 16'(4 * p), 32'(NS));
    end
    for (int t = 0; t < NUM_THL; t++) begin
      wr(16'h1050 + 16'(4 * t), 32'(thl_sel[t]));
      wr(16'h1051 + 16'(4 * t), thl_act[t]);
      wr(16'h1052 + 16'(4 * t), thl_deact[t]);
    end
    for (int l = 0; l < NUM_TRL; l++)
      for (int p = 0; p < 4; p++) begin
        wr(16'h1080 + 16'(16 * l + 2 * p), 32'(req1[l][p]));
        wr(16'h1081 + 16'(16 * l + 2 * p), 32'(req0[l][p]));
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

    // per-pulse behaviour
    n_echo = 0; n_supp = 0;
    for (int i = 0; i < NPULSE; i++) begin
      int tm;
      bit is_large;
      tm = pulse_k[i] + C0;
      is_large = pulse_a[i] > 10000;
      for (int p = 0; p < NUM_PATHS; p++)
        check(n_in(p, -1, tm - 8, tm + 8) == 1, $sformatf("pulse %0d: one main trigger on path %0d", i, p));
      check(n_in(0, 1, tm - 8, tm + 8) == 1, $sformatf("pulse %0d: boxcar rule keeps the main trigger", i));
      check(n_in(1, 4, tm - 8, tm + 8) == (is_large ? 0 : 1), $sformatf("pulse %0d: high-energy rule", i));
      for (int s = -1; s <= 1; s += 2) begin
        int te;
        te = tm + s * 260;
        check(n_in(0, -1, te - 12, te + 12) == (is_large ? 1 : 0), $sformatf("pulse %0d: echo at %0d on path 0", i, s * 260));
        check(n_in(3, -1, te - 12, te + 12) == (is_large ? 1 : 0), $sformatf("pulse %0d: echo at %0d on path 3", i, s * 260));
        if (is_large) begin
          n_echo += n_in(0, 5, te - 12, te + 12);
          n_supp += n_in(0, -1, te - 12, te + 12) - n_in(0, 1, te - 12, te + 12);
        end
      end
    end
    // matched filter and boxcar: nothing but the main triggers after warm-up
    for (int p = 1; p <= 2; p++) begin
      int n;
      n = n_in(p, -1, WARM, NS);
      check(n == NPULSE, $sformatf("path %0d gives %0d triggers after warm-up, expected %0d", p, n, NPULSE));
    end
    $display("mechanisms: echo triggers %0d, echoes removed by the boxcar rule %0d", n_echo, n_supp);
    check(n_echo == 4 && n_supp == 4, "echo triggers and their suppression");
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
