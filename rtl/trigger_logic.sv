// trigger_logic: one trigger-logic (TrL) decision on a trigger primitive.
//
// The 16 examined bits are {window_thr, peak_thr}: bits 7:0 are the threshold
// states at the peak, bits 15:8 the thresholds that were active anywhere in the
// window. For the path that produced the primitive, req_one[path] lists bits
// that must be 1 and req_zero[path] bits that must be 0; the others are
// ignored (a bit set in both masks makes the path never pass). A primitive that
// meets the requirements is then rejected with probability reject_prob/65536
// (prescale), using the low 16 bits of a 32-bit Galois LFSR (x^32 + x^22 + x^2
// + x + 1) that steps on every primitive. The per-path require-1 / require-0 /
// ignore rule and the random prescale are published; the bit order, the LFSR
// and the probability encoding are this design's choices.
//
// Timing: `pass` is combinational from the inputs; the LFSR steps at the clock
// edge that ends a cycle with in_valid high.
module trigger_logic
  import l1_pkg::*;
#(
  parameter logic [31:0] SEED = 32'h0000_0001
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                in_valid,
  input  primitive_t                          prim,
  input  logic [NUM_PATHS-1:0][2*NUM_THL-1:0] req_one,
  input  logic [NUM_PATHS-1:0][2*NUM_THL-1:0] req_zero,
  input  logic [15:0]                         reject_prob,
  output logic                                pass
);
  logic [31:0]          lfsr;
  logic [2*NUM_THL-1:0] bits, one, zero;
  logic                 req_ok, prescale_ok;

  always_comb begin
    bits        = {prim.window_thr, prim.peak_thr};
    one         = req_one[prim.path];
    zero        = req_zero[prim.path];
    req_ok      = ((bits & one) == one) && ((bits & zero) == '0);
    prescale_ok = (lfsr[15:0] >= reject_prob);
    pass        = in_valid && req_ok && prescale_ok;
  end

  always_ff @(posedge clk) begin
    if (!rst_n)
      lfsr <= (SEED == '0) ? 32'h1 : SEED;
    else if (in_valid)
      lfsr <= lfsr[0] ? ((lfsr >> 1) ^ 32'h8020_0003) : (lfsr >> 1);
  end
endmodule
