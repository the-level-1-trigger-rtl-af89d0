// l1_csr: Avalon-MM slave for run-time configuration and readout of the
// level-1 trigger.
//
// 32-bit data, word addresses. Writes take effect in the next clock. Reads
// have a fixed latency of one clock (avs_readdatavalid); there is no
// waitrequest. Register map (addresses in hex):
//
//   0000-0FFF  W   FIR coefficient b_i of path p: address = p*1024 + i, data[15:0]
//   1000-103F  RW  LC coefficient of channel c in path p: 1000 + p*16 + c, data[7:0]
//   1040-1043  RW  FIR output shift of path p, data[5:0]
//   1050+4t    RW  ThL t (t = 0..7): +0 select[1:0], +1 activation, +2 deactivation
//   1070+4p    RW  peak search p: +0 saturated-window length, +1 timestamp offset
//   1080+16l   RW  TrL l (l = 0..7): +2p require-one[15:0] of path p,
//                  +2p+1 require-zero[15:0] of path p, +8 reject probability[15:0]
//   1100       R   trigger FIFO fill level
//   1101       R   head entry: amplitude
//   1102       R   head entry: timestamp
//   1103       R   head entry: {path[25:24], decision[23:16], window_thr[15:8], peak_thr[7:0]}
//                  reading 1103 removes the entry
//   1104       R   veto FIFO fill level
//   1105       R   veto head: timestamp
//   1106       R   veto head: kind[1:0] (0 full begin, 1 full end, 2 veto begin,
//                  3 veto end); reading 1106 removes the entry
//   1107       R/W errors {arbiter overrun[2], sync overrun[1], veto overflow[0]};
//                  writing any value clears them
//   1108       R   lost-trigger count
//   1109/110A  R   live time, low / high word (sample periods)
//   110B/110C  R   veto time, low / high word
//   110D       R   current timestamp
//
// The register map is this design's own; the published design only states
// that configuration and readout use Avalon-MM. Configuration registers reset
// to zero, which makes every TrL accept everything and every FIR coefficient
// write-only (coefficients must be loaded after power-up).
module l1_csr
  import l1_pkg::*;
(
  input  logic                                      clk,
  input  logic                                      rst_n,
  // Avalon-MM slave
  input  logic [15:0]                               avs_address,
  input  logic                                      avs_read,
  input  logic                                      avs_write,
  input  logic [31:0]                               avs_writedata,
  output logic [31:0]                               avs_readdata,
  output logic                                      avs_readdatavalid,
  // configuration
  output logic [NUM_PATHS-1:0][NUM_CH-1:0][LC_COEF_W-1:0] lc_coef,
  output logic [NUM_PATHS-1:0][FIR_SHIFT_W-1:0]     fir_shift,
  output logic [NUM_PATHS-1:0]                      fir_coef_we,
  output logic [$clog2(FIR_TAPS)-1:0]               fir_coef_addr,
  output logic [FIR_COEF_W-1:0]                     fir_coef_wdata,
  output thl_cfg_t [NUM_THL-1:0]                    thl_cfg,
  output ps_cfg_t  [NUM_PATHS-1:0]                  ps_cfg,
  output trl_cfg_t [NUM_TRL-1:0]                    trl_cfg,
  // readout
  input  trig_entry_t                               trig_head,
  input  logic [$clog2(TRIG_DEPTH+1)-1:0]           trig_count,
  input  veto_entry_t                               veto_head,
  input  logic [$clog2(VETO_DEPTH+1)-1:0]           veto_count,
  input  logic [2:0]                                errors,
  input  logic [31:0]                               lost_count,
  input  logic [TIME_W-1:0]                         live_time,
  input  logic [TIME_W-1:0]                         veto_time,
  input  logic [TS_W-1:0]                           timestamp,
  output logic                                      pop_trig,
  output logic                                      pop_veto,
  output logic                                      clear_errors
);
  localparam int AW_TAP = $clog2(FIR_TAPS);

  wire [15:0] a  = avs_address;
  wire        wr = avs_write;
  wire        rd = avs_read;
  wire        in_thl = (a >= 16'h1050) && (a < 16'h1070);
  wire [15:0] thl_off = a - 16'h1050;
  wire [2:0]  t = thl_off[4:2];

  // ---- FIR coefficient write port (no storage here) ------------------------
  always_comb begin
    fir_coef_we    = '0;
    fir_coef_addr  = a[AW_TAP-1:0];
    fir_coef_wdata = avs_writedata[FIR_COEF_W-1:0];
    if (wr && a < 16'(NUM_PATHS * FIR_TAPS))
      fir_coef_we[a[AW_TAP +: 2]] = 1'b1;
  end

  // ---- configuration registers ---------------------------------------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      lc_coef   <= '0;
      fir_shift <= '0;
      thl_cfg   <= '0;
      ps_cfg    <= '0;
      trl_cfg   <= '0;
    end else if (wr) begin
      if (a[15:6] == 10'h040)                          // 1000-103F
        lc_coef[a[5:4]][a[3:0]] <= avs_writedata[LC_COEF_W-1:0];
      if (a[15:2] == 14'h0410)                         // 1040-1043
        fir_shift[a[1:0]] <= avs_writedata[FIR_SHIFT_W-1:0];
      if (in_thl) begin                                // 1050-106F
        case (a[1:0])
          2'd0: thl_cfg[t].sel   <= avs_writedata[1:0];
          2'd1: thl_cfg[t].act   <= avs_writedata;
          2'd2: thl_cfg[t].deact <= avs_writedata;
          default: ;
        endcase
      end
      if (a[15:4] == 12'h107) begin                    // 1070-107F
        case (a[1:0])
          2'd0: ps_cfg[a[3:2]].sat_len    <= avs_writedata;
          2'd1: ps_cfg[a[3:2]].sat_offset <= avs_writedata;
          default: ;
        endcase
      end
      if (a[15:7] == 9'h021) begin                     // 1080-10FF
        if (a[3] == 1'b0) begin
          if (a[0] == 1'b0) trl_cfg[a[6:4]].req_one [a[2:1]] <= avs_writedata[15:0];
          else              trl_cfg[a[6:4]].req_zero[a[2:1]] <= avs_writedata[15:0];
        end else if (a[3:0] == 4'h8) begin
          trl_cfg[a[6:4]].reject_prob <= avs_writedata[15:0];
        end
      end
    end
  end

  // ---- read mux ---------------------------------------------------------------
  logic [31:0] rdata;
  always_comb begin
    rdata = '0;
    if (a[15:6] == 10'h040)      rdata = 32'($signed(lc_coef[a[5:4]][a[3:0]]));
    else if (a[15:2] == 14'h0410) rdata = 32'(fir_shift[a[1:0]]);
    else if (in_thl) begin
      case (a[1:0])
        2'd0: rdata = 32'(thl_cfg[t].sel);
        2'd1: rdata = thl_cfg[t].act;
        2'd2: rdata = thl_cfg[t].deact;
        default: ;
      endcase
    end else if (a[15:4] == 12'h107) begin
      case (a[1:0])
        2'd0: rdata = ps_cfg[a[3:2]].sat_len;
        2'd1: rdata = ps_cfg[a[3:2]].sat_offset;
        default: ;
      endcase
    end else if (a[15:7] == 9'h021) begin
      if (a[3] == 1'b0)
        rdata = 32'(a[0] ? trl_cfg[a[6:4]].req_zero[a[2:1]] : trl_cfg[a[6:4]].req_one[a[2:1]]);
      else if (a[3:0] == 4'h8)
        rdata = 32'(trl_cfg[a[6:4]].reject_prob);
    end else begin
      case (a)
        16'h1100: rdata = 32'(trig_count);
        16'h1101: rdata = trig_head.prim.amplitude;
        16'h1102: rdata = trig_head.prim.timestamp;
        16'h1103: rdata = {6'd0, trig_head.prim.path, trig_head.decision,
                           trig_head.prim.window_thr, trig_head.prim.peak_thr};
        16'h1104: rdata = 32'(veto_count);
        16'h1105: rdata = veto_head.timestamp;
        16'h1106: rdata = 32'(veto_head.kind);
        16'h1107: rdata = 32'(errors);
        16'h1108: rdata = lost_count;
        16'h1109: rdata = live_time[31:0];
        16'h110A: rdata = 32'(live_time[TIME_W-1:32]);
        16'h110B: rdata = veto_time[31:0];
        16'h110C: rdata = 32'(veto_time[TIME_W-1:32]);
        16'h110D: rdata = timestamp;
        default:  rdata = '0;
      endcase
    end
  end

  assign pop_trig     = rd && a == 16'h1103 && trig_count != '0;
  assign pop_veto     = rd && a == 16'h1106 && veto_count != '0;
  assign clear_errors = wr && a == 16'h1107;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      avs_readdata      <= '0;
      avs_readdatavalid <= 1'b0;
    end else begin
      avs_readdatavalid <= rd;
      if (rd) avs_readdata <= rdata;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(avs_read && avs_write))
    else $error("l1_csr: read and write in the same clock");
endmodule
