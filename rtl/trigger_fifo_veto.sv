// trigger_fifo_veto: trigger FIFO, veto FIFO and live-time bookkeeping.
//
// Accepted trigger entries (primitive plus the eight decision bits) go into a
// TRIG_FIFO_DEPTH (256) entry FIFO read by the data acquisition. The trigger is
// vetoed while that FIFO is full or the external veto input is high; a trigger
// offered during a veto is dropped and counted in lost_count. The begin and end
// of each FIFO-full period and of each external veto period are recorded, with
// the current timestamp, in a VETO_FIFO_DEPTH-entry veto FIFO; when an event finds
// the veto FIFO full it is lost and the sticky veto_overflow error is set. On
// every sample tick, live_time counts up when no veto is active and veto_time
// when one is. These functions follow the paper; the veto-FIFO depth, the
// record format, the time unit (one downsampled sample) and the counter widths
// are this design's choices.
//
// Timing: everything is registered. A full-period begin is recorded in the
// clock after the FIFO becomes full, with the timestamp of that clock; up to
// two veto records (full and external) can be written in one clock.
module trigger_fifo_veto
  import l1_pkg::*;
#(
  parameter int TRIG_FIFO_DEPTH = 256,
  parameter int VETO_FIFO_DEPTH = 64,
  parameter int TIME_CNT_W     = 48
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              tick,
  input  logic [TS_W-1:0]                   ts,
  input  logic                              in_valid,
  input  trig_entry_t                       in_entry,
  input  logic                              ext_veto,
  input  logic                              pop_trig,
  input  logic                              pop_veto,
  input  logic                              clear_error,
  output trig_entry_t                       trig_head,
  output logic [$clog2(TRIG_FIFO_DEPTH+1)-1:0]   trig_count,
  output veto_entry_t                       veto_head,
  output logic [$clog2(VETO_FIFO_DEPTH+1)-1:0]   veto_count,
  output logic                              veto_overflow,
  output logic                              vetoed,
  output logic [31:0]                       lost_count,
  output logic [TIME_CNT_W-1:0]                 live_time,
  output logic [TIME_CNT_W-1:0]                 veto_time
);
  localparam int VAW = (VETO_FIFO_DEPTH > 1) ? $clog2(VETO_FIFO_DEPTH) : 1;
  localparam int VCW = $clog2(VETO_FIFO_DEPTH + 1);

  // ---- trigger FIFO --------------------------------------------------------
  logic trig_full, trig_empty;
  logic [$bits(trig_entry_t)-1:0] head_bits;

  assign vetoed = trig_full || ext_veto;

  sync_fifo #(.WIDTH($bits(trig_entry_t)), .DEPTH(TRIG_FIFO_DEPTH)) u_trig (
    .clk, .rst_n,
    .push  (in_valid && !vetoed),
    .din   (in_entry),
    .pop   (pop_trig && !trig_empty),
    .dout  (head_bits),
    .count (trig_count),
    .full  (trig_full),
    .empty (trig_empty)
  );
  assign trig_head = trig_entry_t'(head_bits);

  // ---- veto FIFO (two write ports) -----------------------------------------
  veto_entry_t   vmem [VETO_FIFO_DEPTH];
  logic [VAW-1:0] vwp, vrp;
  logic          full_q, ext_q;

  wire ev_full = (trig_full != full_q);
  wire ev_ext  = (ext_veto  != ext_q);
  veto_entry_t rec_full, rec_ext;
  assign rec_full = '{kind: trig_full ? VETO_FULL_BEGIN : VETO_FULL_END, timestamp: ts};
  assign rec_ext  = '{kind: ext_veto  ? VETO_EXT_BEGIN  : VETO_EXT_END,  timestamp: ts};

  wire  vpop   = pop_veto && (veto_count != '0);
  wire [VCW:0] space = (VCW+1)'(VETO_FIFO_DEPTH) - (VCW+1)'(veto_count) + (VCW+1)'(vpop);
  // which records fit
  wire  wr_full = ev_full && (space >= 1);
  wire  wr_ext  = ev_ext  && (space >= (ev_full ? 2 : 1));
  wire  [1:0] nwr = 2'(wr_full) + 2'(wr_ext);

  function automatic logic [VAW-1:0] vinc(input logic [VAW-1:0] a, input int n);
    int s;
    s = int'(a) + n;
    if (s >= VETO_FIFO_DEPTH) s -= VETO_FIFO_DEPTH;
    return VAW'(s);
  endfunction

  always_ff @(posedge clk) begin
    if (wr_full) vmem[vwp] <= rec_full;
    if (wr_ext)  vmem[wr_full ? vinc(vwp, 1) : vwp] <= rec_ext;
  end
  assign veto_head = vmem[vrp];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      full_q        <= 1'b0;
      ext_q         <= 1'b0;
      vwp           <= '0;
      vrp           <= '0;
      veto_count    <= '0;
      veto_overflow <= 1'b0;
      lost_count    <= '0;
      live_time     <= '0;
      veto_time     <= '0;
    end else begin
      full_q <= trig_full;
      ext_q  <= ext_veto;
      vwp    <= vinc(vwp, int'(nwr));
      if (vpop) vrp <= vinc(vrp, 1);
      veto_count <= veto_count + VCW'(nwr) - VCW'(vpop);
      if ((ev_full && !wr_full) || (ev_ext && !wr_ext)) veto_overflow <= 1'b1;
      if (clear_error) veto_overflow <= 1'b0;
      if (in_valid && vetoed && lost_count != '1) lost_count <= lost_count + 1'b1;
      if (tick) begin
        if (vetoed) veto_time <= veto_time + 1'b1;
        else        live_time <= live_time + 1'b1;
      end
    end
  end
endmodule
