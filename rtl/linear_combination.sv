// linear_combination: first stage of a trigger path; a weighted sum of all
// synchronised channels.
//
// out = sum_c coef[c] * in[c], with unsigned IN_W-bit channel samples and
// signed COEF_W-bit run-time coefficients (8 bits, as published). Choosing the
// coefficients selects, e.g., the sum of all phonon channels, one side of the
// detector or a calibrated mix of phonon and charge channels. The output is
// IN_W + COEF_W + log2(NCH) bits wide, so it never overflows.
//
// Interface: Avalon-ST in and out (valid/ready/data) with one register stage,
// so the result appears one clock after the input is accepted. Coefficients are
// sampled when the input is accepted.
module linear_combination #(
  parameter int NCH     = 16,
  parameter int IN_W    = 34,
  parameter int COEF_W  = 8,
  parameter int OUT_W   = IN_W + COEF_W + $clog2(NCH)
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           in_valid,
  output logic                           in_ready,
  input  logic [NCH-1:0][IN_W-1:0]       in_data,
  input  logic [NCH-1:0][COEF_W-1:0]     coef,
  output logic                           out_valid,
  input  logic                           out_ready,
  output logic signed [OUT_W-1:0]        out_data
);
  logic signed [OUT_W-1:0] sum;

  // Operands are extended to the full output width before multiplying, so the
  // product is formed at OUT_W bits.
  always_comb begin
    logic signed [OUT_W-1:0] x, w;
    sum = '0;
    for (int c = 0; c < NCH; c++) begin
      x = OUT_W'(in_data[c]);                       // zero-extended
      w = OUT_W'($signed(coef[c]));                 // sign-extended
      sum += x * w;
    end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out_data <= sum;
    end
  end
endmodule
