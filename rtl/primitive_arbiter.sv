// primitive_arbiter: merges the primitive streams of the four peak searches
// into the single stream examined by the trigger logic.
//
// Each path has one pending register. A primitive arriving from path p is
// stored there; every clock the lowest-numbered pending path is forwarded and
// its register freed. Because a peak search emits at most one primitive per
// downsampled sample (over a thousand clocks), fixed priority cannot starve a
// path. A primitive arriving while its path's register is still occupied
// replaces the old one and sets the sticky overrun flag. The paper does not
// describe this merging; the scheme is this design's own.
//
// Timing: out_valid is registered; a lone primitive appears one clock after it
// arrives. The consumer must accept every output (no ready).
module primitive_arbiter
  import l1_pkg::*;
#(
  parameter int NPATH = 4
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [NPATH-1:0]             in_valid,
  input  primitive_t [NPATH-1:0]       in_prim,
  output logic                         out_valid,
  output primitive_t                   out_prim,
  input  logic                         clear_overrun,
  output logic                         overrun
);
  logic [NPATH-1:0]       pend;
  primitive_t [NPATH-1:0] held;
  logic [NPATH-1:0]       grant;

  // lowest pending index wins
  always_comb begin
    grant = '0;
    for (int p = NPATH - 1; p >= 0; p--)
      if (pend[p]) grant = NPATH'(1) << p;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pend      <= '0;
      held      <= '0;
      out_valid <= 1'b0;
      out_prim  <= '0;
      overrun   <= 1'b0;
    end else begin
      out_valid <= |grant;
      for (int p = 0; p < NPATH; p++) begin
        if (grant[p]) out_prim <= held[p];
        if (in_valid[p]) begin
          held[p] <= in_prim[p];
          pend[p] <= 1'b1;
          if (pend[p] && !grant[p]) overrun <= 1'b1;
        end else if (grant[p]) begin
          pend[p] <= 1'b0;
        end
      end
      if (clear_overrun) overrun <= 1'b0;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(grant));
endmodule
