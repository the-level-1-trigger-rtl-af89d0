// peak_search: turns one trigger path's FIR output and the threshold bits into
// trigger primitives.
//
// The trigger window of this path is the run of consecutive samples in which
// at least one threshold associated with this path (bit set in `assoc`) is 1.
// Inside a window the module keeps the largest FIR value, the timestamp of the
// sample where it occurred (first one on ties), the eight threshold bits at
// that sample, and the OR of the threshold bits over the whole window. On the
// first sample after the window it emits one primitive_t. Saturated pulses: if
// the window lasted more than `sat_len` samples, the reported timestamp is the
// window's first sample plus `sat_offset` instead of the time of the maximum.
// The recorded quantities and the saturated-pulse rule are published; tie
// handling, the ">" comparison for the duration and the emit point are this
// design's choices.
//
// Timing: inputs are sampled when in_valid is high; out_valid is a registered
// one-clock pulse in the clock after the closing sample.
module peak_search
  import l1_pkg::*;
#(
  parameter int PATH = 0,
  parameter int NTHL = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [31:0]      y,
  input  logic [TS_W-1:0]         ts,
  input  logic [NTHL-1:0]         thr,
  input  logic [NTHL-1:0]         assoc,
  input  logic [31:0]             sat_len,
  input  logic [TS_W-1:0]         sat_offset,
  output logic                    out_valid,
  output primitive_t              prim
);
  logic                in_win;
  logic signed [31:0]  max_y;
  logic [TS_W-1:0]     max_ts, start_ts;
  logic [NTHL-1:0]     peak_thr, win_thr;
  logic [31:0]         dur;

  wire active = |(thr & assoc);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      in_win    <= 1'b0;
      max_y     <= '0;
      max_ts    <= '0;
      start_ts  <= '0;
      peak_thr  <= '0;
      win_thr   <= '0;
      dur       <= '0;
      out_valid <= 1'b0;
      prim      <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        if (active) begin
          if (!in_win) begin
            in_win   <= 1'b1;
            max_y    <= y;
            max_ts   <= ts;
            start_ts <= ts;
            peak_thr <= thr;
            win_thr  <= thr;
            dur      <= 32'd1;
          end else begin
            if (dur != '1) dur <= dur + 1'b1;
            win_thr <= win_thr | thr;
            if (y > max_y) begin
              max_y    <= y;
              max_ts   <= ts;
              peak_thr <= thr;
            end
          end
        end else if (in_win) begin
          in_win          <= 1'b0;
          out_valid       <= 1'b1;
          prim.path       <= 2'(PATH);
          prim.amplitude  <= max_y;
          prim.timestamp  <= (dur > sat_len) ? start_ts + sat_offset : max_ts;
          prim.peak_thr   <= peak_thr;
          prim.window_thr <= win_thr;
        end
      end
    end
  end
endmodule
