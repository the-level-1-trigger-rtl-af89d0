// tb_peak_search: a random sequence of FIR values and threshold bits is
// recorded, then the expected primitives are found independently by scanning
// the record for windows (runs where an associated bit is set), taking the
// first maximum, the bits at it, the OR over the run and, for runs longer than
// sat_len, start + sat_offset as timestamp. The primitives produced by the
// module are compared with that list in order. Both the normal and the
// saturated-pulse timestamp rule must occur.
module tb_peak_search;
  import l1_pkg::*;
  localparam int NS = 6000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, out_valid;
  logic signed [31:0] y;
  logic [31:0] ts;
  logic [7:0] thr, assoc;
  logic [31:0] sat_len, sat_offset;
  primitive_t prim;

  peak_search #(.PATH(2)) dut (.clk, .rst_n, .in_valid, .y, .ts, .thr, .assoc, .sat_len, .sat_offset, .out_valid, .prim);

  int signed ry [NS];
  logic [7:0] rt [NS];
  primitive_t got[$];
  always @(posedge clk) if (rst_n && out_valid) got.push_back(prim);

  initial begin
    primitive_t expq[$];
    int n_sat = 0, n_norm = 0;
    in_valid = 0; y = 0; ts = 0; thr = 0;
    assoc = 8'b0010_0101; sat_len = 12; sat_offset = 3;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int n = 0; n < NS; n++) begin
      // bursty threshold activity
      ry[n] = int'($urandom_range(0, 2000)) - 1000;
      rt[n] = 8'($urandom);
      if ((n / 40) % 2 == 0) rt[n] = rt[n] & 8'b1101_1010;      // mostly no associated bit
      if ((n / 200) % 3 == 1 && n % 200 < 30) rt[n] = rt[n] | 8'b0000_0100; // long windows
      @(negedge clk);
      in_valid = 1; y = ry[n]; ts = 32'(n + 1000); thr = rt[n];
      @(negedge clk);
      in_valid = 0;
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    repeat (5) @(negedge clk);
    // reference scan
    begin
      int n = 0;
      while (n < NS) begin
        if ((rt[n] & assoc) != 0) begin
          int s, m;
          logic [7:0] o;
          primitive_t e;
          s = n; m = n; o = 0;
          while (n < NS && (rt[n] & assoc) != 0) begin
            if (ry[n] > ry[m]) m = n;
            o |= rt[n];
            n++;
          end
          if (n == NS) break;                     // window not closed
          e.path = 2'd2;
          e.amplitude = 32'(ry[m]);
          e.peak_thr = rt[m];
          e.window_thr = o;
          if (n - s > int'(sat_len)) begin e.timestamp = 32'(s + 1000) + sat_offset; n_sat++; end
          else begin e.timestamp = 32'(m + 1000); n_norm++; end
          expq.push_back(e);
        end else n++;
      end
    end
    checks++;
    if (got.size() != expq.size()) begin failures++; $display("FAIL %0d primitives, expected %0d", got.size(), expq.size()); end
    for (int i = 0; i < expq.size() && i < got.size(); i++) begin
      checks++;
      if (got[i] != expq[i]) begin failures++; $display("FAIL primitive %0d: got %h exp %h", i, got[i], expq[i]); end
    end
    checks++;
    $display("windows: normal %0d saturated %0d", n_norm, n_sat);
    if (n_sat == 0 || n_norm == 0) begin failures++; $display("FAIL a timestamp rule never used"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (6 * NS + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
