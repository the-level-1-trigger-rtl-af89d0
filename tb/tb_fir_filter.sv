// tb_fir_filter: full-size (1024-tap) FIR test.
//
// After reset the module must hold in_ready low while it clears its sample
// buffer. Random 16-bit coefficients are loaded, then 1100 random inputs
// (enough to wrap the circular buffer) are filtered with a random output shift
// per sample. Each output is compared with sum_i b_i x[n-i] computed here in
// 128-bit arithmetic (x before the first input is zero), both the raw 72-bit
// sum and the scaled, saturated 32-bit value. Positive and negative saturation
// and the unsaturated case must each occur. The latency from input handshake
// to out_valid must be TAPS+2 clocks.
module tb_fir_filter;
  localparam int TAPS = 1024;
  localparam int NS   = 1100;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, coef_we, out_valid;
  logic signed [45:0] in_data;
  logic [5:0] shift;
  logic [9:0] coef_addr;
  logic signed [15:0] coef_wdata;
  logic signed [31:0] out_data;
  logic signed [71:0] acc_out;

  fir_filter dut (.clk, .rst_n, .in_valid, .in_ready, .in_data, .shift, .coef_we, .coef_addr, .coef_wdata,
                  .out_valid, .out_data, .acc_out);

  logic signed [127:0] x [NS];
  logic signed [15:0]  b [TAPS];
  int n_sat_pos = 0, n_sat_neg = 0, n_plain = 0;

  function automatic logic signed [31:0] scale(input logic signed [127:0] acc, input int sh);
    logic signed [255:0] w;
    w = 256'(acc);
    w = w <<< sh;
    w = w >>> 40;
    if (w > 256'sd2147483647)  return 32'sh7FFF_FFFF;
    if (w < -256'sd2147483648) return 32'sh8000_0000;
    return w[31:0];
  endfunction

  initial begin
    int clear_cycles;
    in_valid = 0; in_data = '0; shift = '0; coef_we = 0; coef_addr = '0; coef_wdata = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // buffer clear: in_ready must stay low for TAPS clocks
    clear_cycles = 0;
    do begin @(posedge clk); #1 clear_cycles++; end while (!in_ready);
    @(negedge clk);
    checks++;
    if (clear_cycles != TAPS) begin failures++; $display("FAIL clear took %0d clocks", clear_cycles); end
    // coefficients
    for (int i = 0; i < TAPS; i++) begin
      b[i] = 16'($urandom);
      coef_we = 1; coef_addr = 10'(i); coef_wdata = b[i];
      @(negedge clk);
    end
    coef_we = 0;
    for (int n = 0; n < NS; n++) begin
      logic signed [127:0] e;
      int start, sh;
      // inputs: mostly random full range, sometimes small
      in_data = (n % 3 == 0) ? 46'($signed(16'($urandom))) : {$urandom, $urandom}[45:0];
      x[n] = 128'(in_data);
      sh = (n % 4 == 0) ? 40 : int'($urandom_range(0, 63));
      shift = 6'(sh);
      in_valid = 1;
      #1 checks++;
      if (!in_ready) begin failures++; $display("FAIL not ready"); end
      @(posedge clk);
      start = 0;
      @(negedge clk);
      in_valid = 0;
      e = 0;
      for (int i = 0; i < TAPS; i++)
        if (n - i >= 0) e += 128'(b[i]) * x[n-i];
      start = 0;
      do begin @(posedge clk); #1 start++; end while (!out_valid);
      checks += 3;
      if (start != TAPS + 2) begin failures++; $display("FAIL latency %0d", start); end
      if (128'(acc_out) != e) begin failures++; $display("FAIL n=%0d acc %0d exp %0d", n, acc_out, e); end
      if (out_data != scale(e, sh)) begin failures++; $display("FAIL n=%0d out %0d exp %0d sh=%0d", n, out_data, scale(e, sh), sh); end
      if (out_data == 32'sh7FFF_FFFF) n_sat_pos++;
      else if (out_data == 32'sh8000_0000) n_sat_neg++;
      else n_plain++;
    end
    checks++;
    $display("saturated +%0d -%0d plain %0d", n_sat_pos, n_sat_neg, n_plain);
    if (n_sat_pos == 0 || n_sat_neg == 0 || n_plain == 0) begin failures++; $display("FAIL saturation cases not all seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1300 * NS + 5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
