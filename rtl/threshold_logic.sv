// threshold_logic: one hysteresis threshold (ThL) on a selectable FIR output.
//
// The module watches FIR output `sel` of the NPATH paths. Its state bit goes to
// 1 when that value is strictly above the activation threshold `act` and
// returns to 0 only when the value is strictly below the (lower) deactivation
// threshold `deact`; in between it keeps its value. The hysteresis and the free
// choice of FIR are published; strict comparisons, reset to 0 and the single
// register stage are this design's choices.
//
// Timing: state and out_valid are registered; they reflect the sample that was
// presented with in_valid one clock earlier.
module threshold_logic #(
  parameter int NPATH = 4,
  parameter int W     = 32
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic [NPATH-1:0][W-1:0]       in_data,
  input  logic [$clog2(NPATH)-1:0]      sel,
  input  logic signed [W-1:0]           act,
  input  logic signed [W-1:0]           deact,
  output logic                          out_valid,
  output logic                          state
);
  logic signed [W-1:0] y;
  assign y = $signed(in_data[sel]);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        if (!state && y > act)      state <= 1'b1;
        else if (state && y < deact) state <= 1'b0;
      end
    end
  end
endmodule
