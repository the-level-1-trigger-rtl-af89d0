// tb_trigger_fifo_veto: fills the 256-entry trigger FIFO past full, checks
// that the overflowing triggers are counted as lost and that FIFO-full begin
// and end are logged in the veto FIFO; reads back all entries in order; runs
// an external veto period with triggers during it; toggles the external veto
// until the veto FIFO overflows and checks the sticky error and its clear; and
// checks live time + veto time against the number of ticks and the veto time
// against the ticks spent vetoed.
module tb_trigger_fifo_veto;
  import l1_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic tick, in_valid, ext_veto, pop_trig, pop_veto, clear_error;
  logic [31:0] ts;
  trig_entry_t in_entry, trig_head;
  logic [8:0] trig_count;
  veto_entry_t veto_head;
  logic [6:0] veto_count;
  logic veto_overflow, vetoed;
  logic [31:0] lost_count;
  logic [47:0] live_time, veto_time;

  trigger_fifo_veto dut (.clk, .rst_n, .tick, .ts, .in_valid, .in_entry, .ext_veto, .pop_trig, .pop_veto,
                         .clear_error, .trig_head, .trig_count, .veto_head, .veto_count, .veto_overflow,
                         .vetoed, .lost_count, .live_time, .veto_time);

  // free-running tick every 4 clocks, timestamp counts ticks
  int nticks = 0, nveto_ticks = 0, cyc = 0;
  always @(negedge clk) if (rst_n) begin
    cyc++;
    tick = (cyc % 4 == 0);
  end
  always @(posedge clk) if (rst_n && tick) begin
    nticks++;
    if (vetoed) nveto_ticks++;
    ts <= ts + 1;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    trig_entry_t sent[$];
    veto_entry_t v;
    logic [31:0] ts_full, ts_unfull, ts_vb, ts_ve;
    tick = 0; ts = 0; in_valid = 0; in_entry = '0; ext_veto = 0; pop_trig = 0; pop_veto = 0; clear_error = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // 1. overfill
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      in_valid = 1; in_entry = {$urandom, $urandom, $urandom};
      if (n < 256) sent.push_back(in_entry);
      if (n == 256) ts_full = ts;
      @(negedge clk);
      in_valid = 0;
    end
    @(negedge clk);
    check(trig_count == 256, "fifo not full");
    check(lost_count == 44, $sformatf("lost %0d", lost_count));
    check(veto_count == 1 && veto_head.kind == VETO_FULL_BEGIN, "no full-begin record");
    check(veto_head.timestamp >= ts_full - 1 && veto_head.timestamp <= ts_full, "full-begin time");
    // 2. drain, checking order
    for (int n = 0; n < 256; n++) begin
      check(trig_head == sent[n], $sformatf("entry %0d", n));
      if (n == 0) ts_unfull = ts;
      pop_trig = 1; @(negedge clk); pop_trig = 0; @(negedge clk);
    end
    check(trig_count == 0, "fifo not empty");
    check(veto_count == 2, "no full-end record");
    pop_veto = 1; @(negedge clk); pop_veto = 0; @(negedge clk);
    check(veto_head.kind == VETO_FULL_END && veto_head.timestamp >= ts_unfull && veto_head.timestamp <= ts_unfull + 1, "full-end record");
    pop_veto = 1; @(negedge clk); pop_veto = 0; @(negedge clk);
    check(veto_count == 0, "veto fifo not empty");
    // 3. external veto with triggers inside
    repeat (10) @(negedge clk);
    ts_vb = ts; ext_veto = 1;
    repeat (20) @(negedge clk);
    for (int n = 0; n < 5; n++) begin in_valid = 1; @(negedge clk); in_valid = 0; @(negedge clk); end
    ts_ve = ts; ext_veto = 0;
    repeat (3) @(negedge clk);
    check(lost_count == 49 && trig_count == 0, "triggers during external veto");
    check(veto_count == 2, "external veto records");
    check(veto_head.kind == VETO_EXT_BEGIN && veto_head.timestamp == ts_vb, "ext begin record");
    pop_veto = 1; @(negedge clk); pop_veto = 0; @(negedge clk);
    check(veto_head.kind == VETO_EXT_END && veto_head.timestamp >= ts_ve && veto_head.timestamp <= ts_ve + 1, "ext end record");
    pop_veto = 1; @(negedge clk); pop_veto = 0; @(negedge clk);
    // one accepted trigger outside the veto
    in_valid = 1; @(negedge clk); in_valid = 0; @(negedge clk);
    check(trig_count == 1 && lost_count == 49, "trigger after veto");
    // 4. veto FIFO overflow
    check(!veto_overflow, "overflow too early");
    for (int n = 0; n < 40; n++) begin ext_veto = 1; @(negedge clk); ext_veto = 0; @(negedge clk); end
    @(negedge clk);
    check(veto_count == 64, $sformatf("veto count %0d", veto_count));
    check(veto_overflow, "overflow not flagged");
    clear_error = 1; @(negedge clk); clear_error = 0; @(negedge clk);
    check(!veto_overflow, "overflow not cleared");
    // 5. time counters
    @(posedge clk); #1;
    check(live_time + veto_time == 48'(nticks), $sformatf("live %0d + veto %0d != ticks %0d", live_time, veto_time, nticks));
    check(veto_time == 48'(nveto_ticks) && nveto_ticks > 0, $sformatf("veto time %0d exp %0d", veto_time, nveto_ticks));
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
