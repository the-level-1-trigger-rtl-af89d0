// downsample_filter: cascaded integrator-comb (CIC) decimator for a group of
// ADC channels sampled together.
//
// Transfer function H(z) = ((1 - z^-RM)/(1 - z^-1))^N with M = 1 and N = 3, as
// published; R is 16 for the phonon groups and 64 for the charge groups, which
// brings both to 39.0625 kHz. Structure (Hogenauer): N integrators run at the
// input rate in modular arithmetic of ACC_W = IN_W + N*log2(R) bits; every R-th
// input the last integrator is passed through N first-difference combs. The
// result is the sum of the input convolved three times with a length-R boxcar,
// with the full gain R^3 kept (no normalisation; the paper does not mention one)
// and zero-extended to OUT_W.
//
// Interface: in_valid marks one new sample on all CH channels. out_valid pulses
// for one clock, registered, one clock after the R-th input of each group of R;
// out_data holds its value until the next output.
module downsample_filter #(
  parameter int CH    = 4,
  parameter int R     = 16,
  parameter int N     = 3,
  parameter int IN_W  = 16,
  parameter int OUT_W = 34
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic [CH-1:0][IN_W-1:0]     in_data,
  output logic                        out_valid,
  output logic [CH-1:0][OUT_W-1:0]    out_data
);
  localparam int ACC_W = IN_W + N * $clog2(R);
  localparam int CNT_W = (R > 1) ? $clog2(R) : 1;

  initial begin
    assert (ACC_W <= OUT_W) else $error("downsample_filter: OUT_W too small");
    assert ((1 << $clog2(R)) == R) else $error("downsample_filter: R must be a power of two");
  end

  logic [CH-1:0][N-1:0][ACC_W-1:0] integ;      // integrator chain
  logic [CH-1:0][N-1:0][ACC_W-1:0] integ_next;
  logic [CH-1:0][N-1:0][ACC_W-1:0] comb_dly;   // previous input of each comb
  logic [CNT_W-1:0]                phase;

  // Integrators at the input rate.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      integ <= '0;
      phase <= '0;
    end else if (in_valid) begin
      integ <= integ_next;
      phase <= (phase == CNT_W'(R - 1)) ? '0 : phase + 1'b1;
    end
  end

  // Integrator values including the current input (the chain is not
  // pipelined, so the comb section can use them in the same clock).
  always_comb begin
    for (int c = 0; c < CH; c++) begin
      integ_next[c][0] = integ[c][0] + ACC_W'(in_data[c]);
      for (int s = 1; s < N; s++)
        integ_next[c][s] = integ[c][s] + integ_next[c][s-1];
    end
  end

  // Combs at the output rate.
  logic [CH-1:0][N:0][ACC_W-1:0] comb_val;
  always_comb begin
    for (int c = 0; c < CH; c++) begin
      comb_val[c][0] = integ_next[c][N-1];
      for (int s = 0; s < N; s++)
        comb_val[c][s+1] = comb_val[c][s] - comb_dly[c][s];
    end
  end

  wire decimate = in_valid && (phase == CNT_W'(R - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      comb_dly  <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= decimate;
      if (decimate) begin
        for (int c = 0; c < CH; c++) begin
          for (int s = 0; s < N; s++)
            comb_dly[c][s] <= comb_val[c][s];
          out_data[c] <= OUT_W'(comb_val[c][N]);
        end
      end
    end
  end
endmodule
