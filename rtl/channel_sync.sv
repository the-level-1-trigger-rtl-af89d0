// channel_sync: holding-area registers that align the decimated samples of all
// channels before the trigger paths.
//
// The phonon and charge downsample filters deliver their outputs at the same
// average rate but at different clock cycles. Each channel's sample is parked
// in its holding register; when every channel holds a sample, the whole set is
// copied to the output register and offered downstream as one Avalon-ST word
// (valid/ready/data), and the holding registers are freed. This release rule is
// the published one; the overrun handling is this design's own: a sample that
// arrives for a channel whose holding register is still occupied overwrites it
// and sets the sticky overrun flag, which only clear or reset resets.
//
// Timing: out_valid rises one clock after the last channel's sample arrives,
// provided the output register is free (or being read in that clock).
module channel_sync #(
  parameter int NCH = 16,
  parameter int W   = 34
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [NCH-1:0]        in_valid,
  input  logic [NCH-1:0][W-1:0] in_data,
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [NCH-1:0][W-1:0] out_data,
  input  logic                  clear_overrun,
  output logic                  overrun
);
  logic [NCH-1:0][W-1:0] hold;
  logic [NCH-1:0]        full;

  wire out_free = !out_valid || out_ready;
  wire release_set = (&full) && out_free;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      hold      <= '0;
      full      <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      overrun   <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (release_set) begin
        out_data  <= hold;
        out_valid <= 1'b1;
      end
      for (int c = 0; c < NCH; c++) begin
        if (in_valid[c]) begin
          hold[c] <= in_data[c];
          full[c] <= 1'b1;
          if (full[c] && !release_set) overrun <= 1'b1;
        end else if (release_set) begin
          full[c] <= 1'b0;
        end
      end
      if (clear_overrun) overrun <= 1'b0;
    end
  end

  // Avalon-ST: data must stay stable while valid is high and not accepted.
  property p_stable;
    @(posedge clk) disable iff (!rst_n) (out_valid && !out_ready) |=> (out_valid && $stable(out_data));
  endproperty
  assert property (p_stable);
endmodule
