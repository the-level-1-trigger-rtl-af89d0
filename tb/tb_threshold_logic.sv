// tb_threshold_logic: drives random-walk FIR values on all four inputs with a
// changing select, activation and deactivation threshold, and compares the
// state bit with a reference hysteresis model after every sample. Counts how
// often the bit switched on and off and fails if either never happened.
module tb_threshold_logic;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, out_valid, state;
  logic [3:0][31:0] in_data;
  logic [1:0] sel;
  logic signed [31:0] act, deact;

  threshold_logic dut (.clk, .rst_n, .in_valid, .in_data, .sel, .act, .deact, .out_valid, .state);

  bit ref_state = 0;
  int ons = 0, offs = 0;
  int signed walk [4] = '{0, 0, 0, 0};

  initial begin
    in_valid = 0; in_data = '0; sel = 0; act = 100; deact = 20;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      if (n % 1000 == 0) begin
        sel = 2'($urandom);
        act = 32'($urandom_range(50, 150));
        deact = act - 32'($urandom_range(0, 80));
      end
      for (int p = 0; p < 4; p++) begin
        walk[p] = (n % 50 < 25) ? walk[p] + int'($urandom_range(0, 30)) - 10
                                : walk[p] - int'($urandom_range(0, 30)) + 10;
        in_data[p] = 32'(walk[p]);
      end
      in_valid = ($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (in_valid) begin
        int signed y;
        y = int'($signed(in_data[sel]));
        if (!ref_state && y > act) begin ref_state = 1; ons++; end
        else if (ref_state && y < deact) begin ref_state = 0; offs++; end
      end
      #1;
      checks++;
      if (state != ref_state || out_valid != in_valid) begin
        failures++; $display("FAIL n=%0d state %0b exp %0b", n, state, ref_state);
      end
    end
    checks++;
    $display("on=%0d off=%0d", ons, offs);
    if (ons == 0 || offs == 0) begin failures++; $display("FAIL no switching"); end
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
