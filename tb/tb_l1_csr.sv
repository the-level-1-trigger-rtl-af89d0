// tb_l1_csr: Avalon-MM register block. Writes every configuration register
// with random values and checks both the configuration outputs and the read
// back values (read latency one clock); checks the FIR coefficient write
// strobes per path; checks the readout words of a trigger entry and a veto
// entry, that the last word of each pops the entry and that reading an empty
// FIFO does not pop; and checks the error clear strobe.
module tb_l1_csr;
  import l1_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [15:0] avs_address;
  logic avs_read, avs_write, avs_readdatavalid;
  logic [31:0] avs_writedata, avs_readdata;
  logic [3:0][15:0][7:0] lc_coef;
  logic [3:0][5:0] fir_shift;
  logic [3:0] fir_coef_we;
  logic [9:0] fir_coef_addr;
  logic [15:0] fir_coef_wdata;
  thl_cfg_t [7:0] thl_cfg;
  ps_cfg_t [3:0] ps_cfg;
  trl_cfg_t [7:0] trl_cfg;
  trig_entry_t trig_head;
  logic [8:0] trig_count;
  veto_entry_t veto_head;
  logic [6:0] veto_count;
  logic [2:0] errors;
  logic [31:0] lost_count, timestamp;
  logic [47:0] live_time, veto_time;
  logic pop_trig, pop_veto, clear_errors;

  l1_csr dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk); avs_address = a; avs_writedata = d; avs_write = 1;
    @(negedge clk); avs_write = 0;
  endtask

  int npop_t = 0, npop_v = 0, nclr = 0;
  always @(posedge clk) if (rst_n) begin
    if (pop_trig) npop_t++;
    if (pop_veto) npop_v++;
    if (clear_errors) nclr++;
  end

  task automatic rd(input logic [15:0] a, output logic [31:0] d);
    @(negedge clk); avs_address = a; avs_read = 1;
    @(negedge clk); avs_read = 0;
    checks++;
    if (!avs_readdatavalid) begin failures++; $display("FAIL readdatavalid"); end
    d = avs_readdata;
  endtask

  initial begin
    logic [31:0] d, v;
    avs_address = 0; avs_read = 0; avs_write = 0; avs_writedata = 0;
    trig_head = '0; trig_count = 0; veto_head = '0; veto_count = 0; errors = 3'b101;
    lost_count = 32'd77; timestamp = 32'h1234; live_time = 48'h0001_2345_6789; veto_time = 48'h0000_0000_0042;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // FIR coefficient strobes
    for (int p = 0; p < 4; p++) begin
      @(negedge clk); avs_address = 16'(p * 1024 + 37 * p + 5); avs_writedata = 32'h0000_8001 + 32'(p); avs_write = 1;
      #1 check(fir_coef_we == 4'(1 << p) && fir_coef_addr == 10'(37 * p + 5) && fir_coef_wdata == 16'(16'h8001 + p), "coef strobe");
      @(negedge clk); avs_write = 0;
      #1 check(fir_coef_we == 0, "coef strobe held");
    end
    // LC coefficients
    for (int p = 0; p < 4; p++) for (int c = 0; c < 16; c++) begin
      v = $urandom; wr(16'h1000 + 16'(p * 16 + c), v);
      check(lc_coef[p][c] == v[7:0], "lc coef out");
      rd(16'h1000 + 16'(p * 16 + c), d);
      check(d == 32'($signed(v[7:0])), "lc coef read");
    end
    for (int p = 0; p < 4; p++) begin
      v = $urandom; wr(16'h1040 + 16'(p), v);
      check(fir_shift[p] == v[5:0], "shift");
      rd(16'h1040 + 16'(p), d); check(d == 32'(v[5:0]), "shift read");
    end
    for (int t = 0; t < 8; t++) begin
      logic [31:0] s, a, b;
      s = $urandom; a = $urandom; b = $urandom;
      wr(16'h1050 + 16'(4 * t), s); wr(16'h1051 + 16'(4 * t), a); wr(16'h1052 + 16'(4 * t), b);
      check(thl_cfg[t].sel == s[1:0] && thl_cfg[t].act == a && thl_cfg[t].deact == b, $sformatf("thl %0d", t));
      rd(16'h1051 + 16'(4 * t), d); check(d == a, "thl read");
    end
    for (int p = 0; p < 4; p++) begin
      logic [31:0] a, b;
      a = $urandom; b = $urandom;
      wr(16'h1070 + 16'(4 * p), a); wr(16'h1071 + 16'(4 * p), b);
      check(ps_cfg[p].sat_len == a && ps_cfg[p].sat_offset == b, "ps cfg");
      rd(16'h1071 + 16'(4 * p), d); check(d == b, "ps read");
    end
    for (int l = 0; l < 8; l++) begin
      for (int p = 0; p < 4; p++) begin
        logic [31:0] a, b;
        a = $urandom; b = $urandom;
        wr(16'h1080 + 16'(16 * l + 2 * p), a); wr(16'h1081 + 16'(16 * l + 2 * p), b);
        check(trl_cfg[l].req_one[p] == a[15:0] && trl_cfg[l].req_zero[p] == b[15:0], "trl masks");
        rd(16'h1081 + 16'(16 * l + 2 * p), d); check(d == 32'(b[15:0]), "trl read");
      end
      v = $urandom; wr(16'h1088 + 16'(16 * l), v);
      check(trl_cfg[l].reject_prob == v[15:0], "trl prescale");
    end
    // readout: empty FIFO does not pop
    rd(16'h1103, d);
    check(npop_t == 0, "pop on empty");
    trig_count = 3;
    trig_head = {$urandom, $urandom, $urandom};
    rd(16'h1100, d); check(d == 3, "count");
    rd(16'h1101, d); check(d == trig_head.prim.amplitude, "amplitude");
    rd(16'h1102, d); check(d == trig_head.prim.timestamp, "timestamp");
    check(npop_t == 0, "early pop");
    rd(16'h1103, d);
    check(d == {6'd0, trig_head.prim.path, trig_head.decision, trig_head.prim.window_thr, trig_head.prim.peak_thr}, "word 2");
    check(npop_t == 1, "no pop");
    veto_count = 1; veto_head = {$urandom, $urandom};
    rd(16'h1104, d); check(d == 1, "veto count");
    rd(16'h1105, d); check(d == veto_head.timestamp, "veto ts");
    rd(16'h1106, d); check(d == 32'(veto_head.kind) && npop_v == 1, "veto kind/pop");
    rd(16'h1107, d); check(d == 32'b101, "errors");
    rd(16'h1108, d); check(d == 77, "lost");
    rd(16'h1109, d); check(d == 32'h2345_6789, "live lo");
    rd(16'h110A, d); check(d == 32'h0001, "live hi");
    rd(16'h110B, d); check(d == 32'h42, "veto lo");
    rd(16'h110D, d); check(d == 32'h1234, "ts");
    wr(16'h1107, 0); check(nclr == 1, "clear strobe");
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
