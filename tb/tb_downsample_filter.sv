// tb_downsample_filter: checks the CIC decimator against a direct model.
//
// Two instances are driven with random 16-bit samples: a phonon group (4
// channels, R = 16) and a charge group (2 channels, R = 64). The reference is
// the input convolved three times with a length-R boxcar, evaluated at every
// R-th input, computed from the stored input history; it is compared with each
// output. The test also checks that an output appears exactly one clock after
// every R-th input and at no other time.
module tb_downsample_filter;
  localparam int NIN = 2000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic pv, cv;
  logic [3:0][15:0] pd;
  logic [1:0][15:0] cd;
  logic po_v, co_v;
  logic [3:0][33:0] po_d;
  logic [1:0][33:0] co_d;

  downsample_filter #(.CH(4), .R(16)) dut_p (.clk, .rst_n, .in_valid(pv), .in_data(pd), .out_valid(po_v), .out_data(po_d));
  downsample_filter #(.CH(2), .R(64)) dut_c (.clk, .rst_n, .in_valid(cv), .in_data(cd), .out_valid(co_v), .out_data(co_d));

  longint xp [4][NIN];
  longint xc [2][NIN];
  int np = 0, nc = 0;          // inputs given so far
  int last_p = -10, last_c = -10; // cycle of last input
  int cyc = 0;
  int outs_p = 0, outs_c = 0;


  // three-fold boxcar of length R at index n
  function automatic longint cic_ref(input longint x[], input int n, input int R);
    longint s = 0;
    // weights of (boxcar R)^3 at lag k: number of (a,b,c) in [0,R)^3 with a+b+c=k
    for (int k = 0; k <= 3*(R-1) && k <= n; k++) begin
      longint w = 0;
      for (int a = 0; a < R; a++)
        for (int b = 0; b < R; b++) begin
          int c = k - a - b;
          if (c >= 0 && c < R) w++;
        end
      s += w * x[n-k];
    end
    return s;
  endfunction

  longint hp[], hc[];
  always @(negedge clk) if (rst_n) begin
    if (po_v) begin
      outs_p++;
      checks++;
      if (np % 16 != 0 || last_p != cyc) begin
        failures++; $display("FAIL phonon output timing: inputs=%0d last=%0d cyc=%0d", np, last_p, cyc);
      end
      for (int c = 0; c < 4; c++) begin
        longint e;
        hp = new[np];
        for (int i = 0; i < np; i++) hp[i] = xp[c][i];
        e = cic_ref(hp, np - 1, 16);
        checks++;
        if (longint'(po_d[c]) != e) begin failures++; $display("FAIL phonon ch%0d n=%0d got %0d exp %0d", c, np, po_d[c], e); end
      end
    end
    if (co_v) begin
      outs_c++;
      checks++;
      if (nc % 64 != 0 || last_c != cyc) begin
        failures++; $display("FAIL charge output timing: inputs=%0d", nc);
      end
      for (int c = 0; c < 2; c++) begin
        longint e;
        hc = new[nc];
        for (int i = 0; i < nc; i++) hc[i] = xc[c][i];
        e = cic_ref(hc, nc - 1, 64);
        checks++;
        if (longint'(co_d[c]) != e) begin failures++; $display("FAIL charge ch%0d n=%0d got %0d exp %0d", c, nc, co_d[c], e); end
      end
    end
  end

  initial begin
    pv = 0; cv = 0; pd = '0; cd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (np < NIN || nc < NIN) begin
      @(negedge clk);
      pv = (np < NIN) && ($urandom_range(0, 2) == 0);
      cv = (nc < NIN) && ($urandom_range(0, 1) == 0);
      for (int c = 0; c < 4; c++) pd[c] = (np < 300) ? 16'hFFFF : 16'($urandom);   // full scale first
      for (int c = 0; c < 2; c++) cd[c] = (nc < 300) ? 16'hFFFF : 16'($urandom);
      @(posedge clk);
      cyc++;
      if (pv) begin for (int c = 0; c < 4; c++) xp[c][np] = longint'(pd[c]); np++; last_p = cyc; end
      if (cv) begin for (int c = 0; c < 2; c++) xc[c][nc] = longint'(cd[c]); nc++; last_c = cyc; end
    end
    @(negedge clk); pv = 0; cv = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (outs_p != NIN / 16 || outs_c != NIN / 64) begin
      failures++; $display("FAIL output count %0d/%0d", outs_p, outs_c);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
