// tb_primitive_arbiter: the four inputs fire at random, often in the same
// clock. Every primitive must come out exactly once; primitives that arrive
// together must leave in path order (0 first); nothing may be lost while no
// overrun is provoked. Finally path 1 fires twice while path 0 holds the
// output, which must set the sticky overrun flag.
module tb_primitive_arbiter;
  import l1_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [3:0] in_valid;
  primitive_t [3:0] in_prim;
  logic out_valid, clear_overrun, overrun;
  primitive_t out_prim;

  primitive_arbiter dut (.clk, .rst_n, .in_valid, .in_prim, .out_valid, .out_prim, .clear_overrun, .overrun);

  primitive_t expq[$];
  int got = 0, together = 0;
  bit overrun_phase = 0;

  always @(posedge clk) if (rst_n && out_valid && !overrun_phase) begin
    checks++; got++;
    if (expq.size() == 0) begin failures++; $display("FAIL unexpected output"); end
    else begin
      primitive_t e;
      e = expq.pop_front();
      if (out_prim != e) begin failures++; $display("FAIL got %h exp %h", out_prim, e); end
    end
  end

  initial begin
    int sent;
    sent = 0;
    in_valid = '0; in_prim = '0; clear_overrun = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      in_valid = 4'($urandom);
      if ($countones(in_valid) > 1) together++;
      for (int p = 0; p < 4; p++) begin
        in_prim[p] = {$urandom, $urandom, $urandom};
        in_prim[p].path = 2'(p);
        if (in_valid[p]) begin expq.push_back(in_prim[p]); sent++; end
      end
      @(negedge clk);
      in_valid = '0;
      repeat (4) @(negedge clk);   // let the pending registers drain
    end
    repeat (5) @(negedge clk);
    checks++;
    if (got != sent || overrun || together == 0) begin failures++; $display("FAIL got %0d sent %0d overrun %0b", got, sent, overrun); end
    overrun_phase = 1;
    // overrun: 0 and 1 together, then 1 again in the next clock
    in_valid = 4'b0011; @(negedge clk);
    in_valid = 4'b0010; @(negedge clk);
    in_valid = 4'b0000;
    expq.delete();
    repeat (3) @(negedge clk);
    checks++;
    if (!overrun) begin failures++; $display("FAIL overrun not flagged"); end
    clear_overrun = 1; @(negedge clk); clear_overrun = 0;
    checks++;
    if (overrun) begin failures++; $display("FAIL overrun not cleared"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
