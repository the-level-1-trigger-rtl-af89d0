// tb_channel_sync: the 16 channels deliver their samples in random order and
// at random times; each released set must equal the last sample of every
// channel and appear only after all 16 arrived. The consumer stalls at random.
// A second phase delivers a channel twice before the set is complete and checks
// that the sticky overrun flag rises and clears.
module tb_channel_sync;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [15:0] in_valid;
  logic [15:0][33:0] in_data;
  logic out_valid, out_ready, clear_overrun, overrun;
  logic [15:0][33:0] out_data;

  channel_sync dut (.clk, .rst_n, .in_valid, .in_data, .out_valid, .out_ready, .out_data, .clear_overrun, .overrun);

  logic [15:0][33:0] expq[$];
  int got = 0;

  // consumer / checker
  always @(negedge clk) if (rst_n) begin
    out_ready <= ($urandom_range(0, 2) != 0);
  end
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    got++;
    if (expq.size() == 0) begin failures++; $display("FAIL unexpected output"); end
    else begin
      logic [15:0][33:0] e;
      e = expq.pop_front();
      if (out_data != e) begin failures++; $display("FAIL set %0d mismatch", got); end
    end
  end

  initial begin
    in_valid = '0; in_data = '0; clear_overrun = 0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int set = 0; set < 100; set++) begin
      logic [15:0] done;
      logic [15:0][33:0] vals;
      done = '0;
      while (done != '1) begin
        @(negedge clk);
        in_valid = '0;
        for (int c = 0; c < 16; c++)
          if (!done[c] && $urandom_range(0, 5) == 0) begin
            in_valid[c] = 1'b1;
            in_data[c]  = {$urandom, $urandom}[33:0];
            vals[c]     = in_data[c];
            done[c]     = 1'b1;
          end
        @(posedge clk);
      end
      expq.push_back(vals);
      @(negedge clk); in_valid = '0;
      // a set must not come out before the previous one is taken: wait
      repeat (6) @(posedge clk);
    end
    repeat (20) @(posedge clk);
    checks++;
    if (got != 100 || overrun) begin failures++; $display("FAIL got=%0d overrun=%0b", got, overrun); end
    // overrun: channel 3 twice before the set completes
    @(negedge clk); in_valid = 16'h0008; in_data[3] = 34'd5;
    @(negedge clk); in_valid = 16'h0008; in_data[3] = 34'd6;
    @(negedge clk); in_valid = '0;
    @(negedge clk);
    checks++;
    if (!overrun) begin failures++; $display("FAIL overrun not flagged"); end
    clear_overrun = 1; @(negedge clk); clear_overrun = 0; @(negedge clk);
    checks++;
    if (overrun) begin failures++; $display("FAIL overrun not cleared"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
