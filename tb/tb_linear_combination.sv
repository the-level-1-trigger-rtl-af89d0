// tb_linear_combination: random channel data and coefficients, checked against
// a 64-bit reference sum; the output is stalled at random (out_ready low) to
// check that a result is held until accepted and that no input is lost or
// duplicated. Also checks the one-clock latency.
module tb_linear_combination;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [15:0][33:0] in_data;
  logic [15:0][7:0]  coef;
  logic signed [45:0] out_data;

  linear_combination dut (.clk, .rst_n, .in_valid, .in_ready, .in_data, .coef, .out_valid, .out_ready, .out_data);

  longint expq[$];
  int sent = 0, got = 0, stalls = 0;
  localparam int N = 500;

  initial begin
    in_valid = 0; out_ready = 1; in_data = '0; coef = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (got < N) begin
      @(negedge clk);
      // consume / check output at this negedge (registered at the last posedge)
      out_ready = ($urandom_range(0, 3) != 0);
      if (sent < N && !(in_valid && !in_ready)) begin
        in_valid = ($urandom_range(0, 1) == 0);
        for (int c = 0; c < 16; c++) begin
          in_data[c] = (sent % 7 == 0) ? 34'h3_FFFF_FFFF : {$urandom, $urandom}[33:0];
          coef[c]    = (sent % 7 == 0) ? 8'h80 : 8'($urandom);
        end
      end else if (sent >= N) in_valid = 0;
      #1;
      if (out_valid && out_ready) begin
        longint e;
        e = expq.pop_front();
        checks++; got++;
        if (longint'(out_data) != e) begin failures++; $display("FAIL got %0d exp %0d", out_data, e); end
      end else if (out_valid) stalls++;
      if (in_valid && in_ready) begin
        longint s;
        s = 0;
        for (int c = 0; c < 16; c++) s += longint'(in_data[c]) * longint'($signed(coef[c]));
        expq.push_back(s);
        sent++;
      end
      @(posedge clk);
    end
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no stall exercised"); end
    $display("stalls=%0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
