// l1_trigger_top: level-1 trigger of one detector readout card.
//
// Data flow (one clock domain):
//   12 phonon ADC channels (3 groups of 4, 625 kHz) -> CIC decimate by 16
//    4 charge ADC channels (2 groups of 2, 2.5 MHz) -> CIC decimate by 64
//   -> channel_sync: all 16 channels aligned at 39.0625 kHz, timestamped
//   -> 4 trigger paths, each linear_combination -> fir_filter (1024 taps)
//   -> 8 threshold_logic modules, each on any one of the 4 FIR outputs
//   -> 4 peak_search modules (one per path, seeing all 8 threshold bits)
//   -> primitive_arbiter -> 8 trigger_logic decisions in parallel
//   -> trigger_fifo_veto (trigger FIFO, veto FIFO, live time)
//   -> read out through the l1_csr Avalon-MM slave.
// The block structure and the counts (5 downsample filters, 4 paths, 8 ThL,
// 4 PS, 8 TrL, one trigger FIFO) are the published architecture; the clocking,
// timestamp source and merging of the paths are this design's own.
//
// Timing: the four FIRs run in lock step and each needs FIR_TAPS+3 clocks per
// sample, so the clock must be at least ~1027 x 39.0625 kHz = 40 MHz; the
// testbenches use 50 MHz (80 clocks per phonon sample). The timestamp is a
// 32-bit count of synchronised samples; sample n carries timestamp n. A trigger
// reaches the FIFO a few clocks after the sample that closes its window.
// Ports are plain signals: the ADC sample buses with one strobe per group,
// the external veto request and the Avalon-MM slave.
module l1_trigger_top
  import l1_pkg::*;
(
  input  logic                                     clk,
  input  logic                                     rst_n,
  // ADC samples
  input  logic [NUM_PHONON/PHONON_GROUP-1:0]       adc_p_valid,
  input  logic [NUM_PHONON-1:0][ADC_W-1:0]         adc_p_data,
  input  logic [NUM_CHARGE/CHARGE_GROUP-1:0]       adc_c_valid,
  input  logic [NUM_CHARGE-1:0][ADC_W-1:0]         adc_c_data,
  // external veto request
  input  logic                                     ext_veto,
  // Avalon-MM slave
  input  logic [15:0]                              avs_address,
  input  logic                                     avs_read,
  input  logic                                     avs_write,
  input  logic [31:0]                              avs_writedata,
  output logic [31:0]                              avs_readdata,
  output logic                                     avs_readdatavalid,
  // status
  output logic                                     trig_available
);
  localparam int NPG = NUM_PHONON / PHONON_GROUP;   // 3
  localparam int NCG = NUM_CHARGE / CHARGE_GROUP;   // 2

  // ---- configuration ---------------------------------------------------------
  logic [NUM_PATHS-1:0][NUM_CH-1:0][LC_COEF_W-1:0] lc_coef;
  logic [NUM_PATHS-1:0][FIR_SHIFT_W-1:0]           fir_shift;
  logic [NUM_PATHS-1:0]                            fir_coef_we;
  logic [$clog2(FIR_TAPS)-1:0]                     fir_coef_addr;
  logic [FIR_COEF_W-1:0]                           fir_coef_wdata;
  thl_cfg_t [NUM_THL-1:0]                          thl_cfg;
  ps_cfg_t  [NUM_PATHS-1:0]                        ps_cfg;
  trl_cfg_t [NUM_TRL-1:0]                          trl_cfg;

  // ---- downsample filters ------------------------------------------------------
  logic [NUM_CH-1:0]             ds_valid;
  logic [NUM_CH-1:0][DS_W-1:0]   ds_data;

  for (genvar g = 0; g < NPG; g++) begin : g_dfp
    logic                               v;
    logic [PHONON_GROUP-1:0][DS_W-1:0]  d;
    downsample_filter #(.CH(PHONON_GROUP), .R(PHONON_R), .N(CIC_ORDER), .IN_W(ADC_W), .OUT_W(DS_W)) u_df (
      .clk, .rst_n,
      .in_valid (adc_p_valid[g]),
      .in_data  (adc_p_data[g*PHONON_GROUP +: PHONON_GROUP]),
      .out_valid(v),
      .out_data (d)
    );
    for (genvar c = 0; c < PHONON_GROUP; c++) begin : g_ch
      assign ds_valid[g*PHONON_GROUP + c] = v;
      assign ds_data [g*PHONON_GROUP + c] = d[c];
    end
  end

  for (genvar g = 0; g < NCG; g++) begin : g_dfc
    logic                               v;
    logic [CHARGE_GROUP-1:0][DS_W-1:0]  d;
    downsample_filter #(.CH(CHARGE_GROUP), .R(CHARGE_R), .N(CIC_ORDER), .IN_W(ADC_W), .OUT_W(DS_W)) u_df (
      .clk, .rst_n,
      .in_valid (adc_c_valid[g]),
      .in_data  (adc_c_data[g*CHARGE_GROUP +: CHARGE_GROUP]),
      .out_valid(v),
      .out_data (d)
    );
    for (genvar c = 0; c < CHARGE_GROUP; c++) begin : g_ch
      assign ds_valid[NUM_PHONON + g*CHARGE_GROUP + c] = v;
      assign ds_data [NUM_PHONON + g*CHARGE_GROUP + c] = d[c];
    end
  end

  // ---- synchronisation -------------------------------------------------------
  logic                        sy_valid, sy_ready, sync_overrun, clear_errors;
  logic [NUM_CH-1:0][DS_W-1:0] sy_data;

  channel_sync #(.NCH(NUM_CH), .W(DS_W)) u_sync (
    .clk, .rst_n,
    .in_valid (ds_valid),
    .in_data  (ds_data),
    .out_valid(sy_valid),
    .out_ready(sy_ready),
    .out_data (sy_data),
    .clear_overrun(clear_errors),
    .overrun  (sync_overrun)
  );

  // Timestamp: number of synchronised samples so far.
  logic [TS_W-1:0] ts_now;
  wire             tick = sy_valid && sy_ready;
  always_ff @(posedge clk) begin
    if (!rst_n) ts_now <= '0;
    else if (tick) ts_now <= ts_now + 1'b1;
  end

  // ---- trigger paths: linear combination + FIR ---------------------------------
  logic [NUM_PATHS-1:0]                 lc_ready, lc_valid, fir_ready, fir_valid;
  logic [NUM_PATHS-1:0][FIR_OUT_W-1:0]  fir_data;

  assign sy_ready = &lc_ready;

  for (genvar p = 0; p < NUM_PATHS; p++) begin : g_path
    logic signed [LC_W-1:0]      lc_out;
    logic signed [FIR_OUT_W-1:0] fir_out;
    logic signed [FIR_ACC_W-1:0] fir_acc;

    linear_combination #(.NCH(NUM_CH), .IN_W(DS_W), .COEF_W(LC_COEF_W), .OUT_W(LC_W)) u_lc (
      .clk, .rst_n,
      .in_valid (sy_valid && sy_ready),
      .in_ready (lc_ready[p]),
      .in_data  (sy_data),
      .coef     (lc_coef[p]),
      .out_valid(lc_valid[p]),
      .out_ready(fir_ready[p]),
      .out_data (lc_out)
    );

    fir_filter #(.TAPS(FIR_TAPS), .IN_W(LC_W), .COEF_W(FIR_COEF_W), .ACC_W(FIR_ACC_W),
                 .OUT_W(FIR_OUT_W), .DROP(FIR_DROP), .SHIFT_W(FIR_SHIFT_W)) u_fir (
      .clk, .rst_n,
      .in_valid  (lc_valid[p]),
      .in_ready  (fir_ready[p]),
      .in_data   (lc_out),
      .shift     (fir_shift[p]),
      .coef_we   (fir_coef_we[p]),
      .coef_addr (fir_coef_addr),
      .coef_wdata(fir_coef_wdata),
      .out_valid (fir_valid[p]),
      .out_data  (fir_out),
      .acc_out   (fir_acc)
    );
    assign fir_data[p] = fir_out;
  end

  // Timestamp of the sample inside the FIRs (they accept in lock step).
  logic [TS_W-1:0] ts_fir, ts_lc;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ts_lc  <= '0;
      ts_fir <= '0;
    end else begin
      if (tick) ts_lc <= ts_now;
      if (lc_valid[0] && fir_ready[0]) ts_fir <= ts_lc;
    end
  end

  // ---- threshold logic -----------------------------------------------------------
  logic [NUM_THL-1:0] thl_state, thl_valid;
  for (genvar t = 0; t < NUM_THL; t++) begin : g_thl
    threshold_logic #(.NPATH(NUM_PATHS), .W(FIR_OUT_W)) u_thl (
      .clk, .rst_n,
      .in_valid (fir_valid[0]),
      .in_data  (fir_data),
      .sel      (thl_cfg[t].sel),
      .act      (thl_cfg[t].act),
      .deact    (thl_cfg[t].deact),
      .out_valid(thl_valid[t]),
      .state    (thl_state[t])
    );
  end

  // FIR outputs and timestamp delayed to line up with the threshold bits.
  logic [NUM_PATHS-1:0][FIR_OUT_W-1:0] fir_q;
  logic [TS_W-1:0]                     ts_q;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      fir_q <= '0;
      ts_q  <= '0;
    end else if (fir_valid[0]) begin
      fir_q <= fir_data;
      ts_q  <= ts_fir;
    end
  end

  // ---- peak search -----------------------------------------------------------------
  logic       [NUM_PATHS-1:0] ps_valid;
  primitive_t [NUM_PATHS-1:0] ps_prim;
  for (genvar p = 0; p < NUM_PATHS; p++) begin : g_ps
    logic [NUM_THL-1:0] assoc;
    always_comb
      for (int t = 0; t < NUM_THL; t++) assoc[t] = (thl_cfg[t].sel == 2'(p));
    peak_search #(.PATH(p), .NTHL(NUM_THL)) u_ps (
      .clk, .rst_n,
      .in_valid  (thl_valid[0]),
      .y         (fir_q[p]),
      .ts        (ts_q),
      .thr       (thl_state),
      .assoc     (assoc),
      .sat_len   (ps_cfg[p].sat_len),
      .sat_offset(ps_cfg[p].sat_offset),
      .out_valid (ps_valid[p]),
      .prim      (ps_prim[p])
    );
  end

  // ---- arbitration and trigger logic -----------------------------------------------
  logic       arb_valid, arb_overrun;
  primitive_t arb_prim;
  primitive_arbiter #(.NPATH(NUM_PATHS)) u_arb (
    .clk, .rst_n,
    .in_valid (ps_valid),
    .in_prim  (ps_prim),
    .out_valid(arb_valid),
    .out_prim (arb_prim),
    .clear_overrun(clear_errors),
    .overrun  (arb_overrun)
  );

  logic [NUM_TRL-1:0] decision;
  for (genvar l = 0; l < NUM_TRL; l++) begin : g_trl
    trigger_logic #(.SEED(32'h1234_5679 + 32'(l) * 32'h0101_0101)) u_trl (
      .clk, .rst_n,
      .in_valid   (arb_valid),
      .prim       (arb_prim),
      .req_one    (trl_cfg[l].req_one),
      .req_zero   (trl_cfg[l].req_zero),
      .reject_prob(trl_cfg[l].reject_prob),
      .pass       (decision[l])
    );
  end

  trig_entry_t entry_q;
  logic        entry_valid;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      entry_q     <= '0;
      entry_valid <= 1'b0;
    end else begin
      entry_valid <= arb_valid && (|decision);
      entry_q     <= '{prim: arb_prim, decision: decision};
    end
  end

  // ---- trigger FIFO and vetoes ----------------------------------------------------
  trig_entry_t                         trig_head;
  veto_entry_t                         veto_head;
  logic [$clog2(TRIG_DEPTH+1)-1:0]     trig_count;
  logic [$clog2(VETO_DEPTH+1)-1:0]     veto_count;
  logic                                veto_overflow, vetoed, pop_trig, pop_veto;
  logic [31:0]                         lost_count;
  logic [TIME_W-1:0]                   live_time, veto_time;

  trigger_fifo_veto #(.TRIG_FIFO_DEPTH(TRIG_DEPTH), .VETO_FIFO_DEPTH(VETO_DEPTH), .TIME_CNT_W(TIME_W)) u_fifo (
    .clk, .rst_n,
    .tick, .ts(ts_now),
    .in_valid     (entry_valid),
    .in_entry     (entry_q),
    .ext_veto,
    .pop_trig, .pop_veto,
    .clear_error  (clear_errors),
    .trig_head, .trig_count, .veto_head, .veto_count,
    .veto_overflow, .vetoed, .lost_count, .live_time, .veto_time
  );
  assign trig_available = (trig_count != '0);

  // ---- register block --------------------------------------------------------------
  l1_csr u_csr (
    .clk, .rst_n,
    .avs_address, .avs_read, .avs_write, .avs_writedata, .avs_readdata, .avs_readdatavalid,
    .lc_coef, .fir_shift, .fir_coef_we, .fir_coef_addr, .fir_coef_wdata,
    .thl_cfg, .ps_cfg, .trl_cfg,
    .trig_head, .trig_count, .veto_head, .veto_count,
    .errors      ({arb_overrun, sync_overrun, veto_overflow}),
    .lost_count, .live_time, .veto_time,
    .timestamp   (ts_now),
    .pop_trig, .pop_veto, .clear_errors
  );

  // The four paths are configured identically in timing and must stay in step.
  assert property (@(posedge clk) disable iff (!rst_n) fir_valid == '0 || fir_valid == '1);
endmodule
