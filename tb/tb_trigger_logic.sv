// tb_trigger_logic: random primitives against random require-one/require-zero
// masks per path. With reject probability 0 the decision must equal the mask
// rule exactly. With probability 1/2 the module must accept a fraction of the
// rule-passing primitives close to 1/2, and with 0xFFFF almost none; an exact
// LFSR reference (same polynomial, same seed) also predicts each decision.
module tb_trigger_logic;
  import l1_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, pass;
  primitive_t prim;
  logic [3:0][15:0] req_one, req_zero;
  logic [15:0] reject_prob;
  localparam logic [31:0] SEED = 32'hACE1_2345;

  trigger_logic #(.SEED(SEED)) dut (.clk, .rst_n, .in_valid, .prim, .req_one, .req_zero, .reject_prob, .pass);

  logic [31:0] lfsr;
  initial begin
    int n_rule, n_pass, n_req0, n_req1;
    in_valid = 0; prim = '0; req_one = '0; req_zero = '0; reject_prob = 0;
    lfsr = SEED;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int phase = 0; phase < 3; phase++) begin
      n_rule = 0; n_pass = 0; n_req0 = 0; n_req1 = 0;
      reject_prob = (phase == 0) ? 16'h0000 : (phase == 1) ? 16'h8000 : 16'hFFFF;
      for (int n = 0; n < 4000; n++) begin
        logic [15:0] bits, one, zero;
        bit rule, expect_pass;
        @(negedge clk);
        if (n % 100 == 0)
          for (int p = 0; p < 4; p++) begin
            req_one[p]  = 16'($urandom) & 16'($urandom) & 16'($urandom);
            req_zero[p] = 16'($urandom) & 16'($urandom) & 16'($urandom) & ~req_one[p];
          end
        prim = {$urandom, $urandom, $urandom};
        in_valid = ($urandom_range(0, 3) != 0);
        bits = {prim.window_thr, prim.peak_thr};
        one = req_one[prim.path]; zero = req_zero[prim.path];
        rule = ((bits & one) == one) && ((bits & zero) == 0);
        expect_pass = in_valid && rule && (lfsr[15:0] >= reject_prob);
        #1 checks++;
        if (pass != expect_pass) begin failures++; $display("FAIL phase %0d n=%0d pass %0b exp %0b", phase, n, pass, expect_pass); end
        if (in_valid && rule) begin n_rule++; if (pass) n_pass++; end
        if (in_valid && !rule && (bits & zero) != 0) n_req0++;
        if (in_valid && !rule && (bits & one) != one) n_req1++;
        if (in_valid) lfsr = lfsr[0] ? ((lfsr >> 1) ^ 32'h8020_0003) : (lfsr >> 1);
        @(posedge clk);
      end
      checks++;
      $display("phase %0d: rule-passing %0d accepted %0d (req1 fails %0d, req0 fails %0d)", phase, n_rule, n_pass, n_req1, n_req0);
      if (n_rule < 50 || n_req0 == 0 || n_req1 == 0) begin failures++; $display("FAIL too few cases"); end
      else if (phase == 0 && n_pass != n_rule) begin failures++; $display("FAIL prescale 0 rejected"); end
      else if (phase == 1 && (n_pass * 10 < n_rule * 4 || n_pass * 10 > n_rule * 6)) begin failures++; $display("FAIL prescale 1/2"); end
      else if (phase == 2 && n_pass * 100 > n_rule) begin failures++; $display("FAIL prescale max"); end
    end
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
