// fir_filter: the TAPS-tap finite impulse response filter of one trigger path,
// with the output scaling that reduces its result to 32 bits.
//
//   y[n] = sum_{i=0}^{TAPS-1} b_i * x[n-i]
//
// Each accepted input x[n] is written into a circular sample buffer of TAPS
// entries; the module then walks the buffer from the newest sample backwards
// together with the coefficient memory (b_0 first), one multiply-accumulate per
// clock, into an ACC_W-bit accumulator. This sequential walk is the published
// scheme; one MAC per clock is this design's choice. The sum is then scaled:
// shifted left by `shift` places, its DROP (40) least-significant bits are
// discarded (arithmetic shift, i.e. rounding towards minus infinity), and the
// result is saturated to the most positive / most negative OUT_W-bit value.
//
// Memories: the sample buffer and coefficient memory are single-read-port
// arrays with a registered read, suitable for block RAM. Coefficients are
// written at any time through coef_we/coef_addr/coef_wdata (coef_addr = i) and
// are not reset. After reset the sample buffer is zero-filled, which takes TAPS
// clocks during which in_ready is low.
//
// Timing: an input is accepted when in_valid && in_ready; out_valid pulses for
// one clock TAPS+2 clocks later, and in_ready is high again from that clock.
// The maximum input rate is thus one sample per TAPS+3 clocks.
module fir_filter #(
  parameter int TAPS    = 1024,
  parameter int IN_W    = 46,
  parameter int COEF_W  = 16,
  parameter int ACC_W   = 72,
  parameter int OUT_W   = 32,
  parameter int DROP    = 40,
  parameter int SHIFT_W = 6
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic signed [IN_W-1:0]   in_data,
  input  logic [SHIFT_W-1:0]       shift,
  input  logic                     coef_we,
  input  logic [$clog2(TAPS)-1:0]  coef_addr,
  input  logic signed [COEF_W-1:0] coef_wdata,
  output logic                     out_valid,
  output logic signed [OUT_W-1:0]  out_data,
  output logic signed [ACC_W-1:0]  acc_out
);
  localparam int AW     = $clog2(TAPS);
  localparam int WIDE_W = ACC_W + (1 << SHIFT_W);

  initial assert ((1 << AW) == TAPS) else $error("fir_filter: TAPS must be a power of two");

  typedef enum logic [1:0] {S_CLEAR, S_IDLE, S_RUN} state_e;
  state_e state;

  // ---- memories ------------------------------------------------------------
  logic signed [IN_W-1:0]   smem [TAPS];
  logic signed [COEF_W-1:0] cmem [TAPS];
  logic                     s_we;
  logic [AW-1:0]            s_waddr, s_raddr, c_raddr;
  logic signed [IN_W-1:0]   s_wdata, s_rdata;
  logic signed [COEF_W-1:0] c_rdata;

  always_ff @(posedge clk) begin
    if (s_we) smem[s_waddr] <= s_wdata;
    s_rdata <= smem[s_raddr];
  end

  always_ff @(posedge clk) begin
    if (coef_we) cmem[coef_addr] <= coef_wdata;
    c_rdata <= cmem[c_raddr];
  end

  // ---- control ---------------------------------------------------------------
  logic [AW-1:0] wp;        // next write position
  logic [AW-1:0] newest;    // position of x[n]
  logic [AW-1:0] idx;       // tap being fetched
  logic          issuing;   // fetch in progress
  logic          rd_valid;  // memory outputs hold a (sample, coefficient) pair
  logic          rd_last;   // ... and it is the last tap
  logic          finish;    // accumulator complete
  logic signed [ACC_W-1:0] acc;

  assign in_ready = (state == S_IDLE);
  wire   accept   = in_valid && in_ready;

  always_comb begin
    s_we    = 1'b0;
    s_waddr = wp;
    s_wdata = in_data;
    if (state == S_CLEAR) begin
      s_we    = 1'b1;
      s_wdata = '0;
    end else if (accept) begin
      s_we    = 1'b1;
    end
    s_raddr = newest - idx;
    c_raddr = idx;
  end

  // Product, extended to the accumulator width before multiplying.
  logic signed [ACC_W-1:0] prod;
  always_comb begin
    logic signed [ACC_W-1:0] a, b;
    a    = ACC_W'(s_rdata);
    b    = ACC_W'(c_rdata);
    prod = a * b;
  end

  // Scaling: (acc << shift) >> DROP, then saturation.
  logic signed [WIDE_W-1:0] wide, scaled;
  logic signed [OUT_W-1:0]  sat;
  localparam logic signed [WIDE_W-1:0] OUT_MAX = WIDE_W'({1'b0, {(OUT_W-1){1'b1}}});
  localparam logic signed [WIDE_W-1:0] OUT_MIN = -OUT_MAX - 1;
  always_comb begin
    wide   = WIDE_W'(acc);
    wide   = wide <<< shift;
    scaled = wide >>> DROP;
    if (scaled > OUT_MAX)      sat = OUT_MAX[OUT_W-1:0];
    else if (scaled < OUT_MIN) sat = OUT_MIN[OUT_W-1:0];
    else                       sat = scaled[OUT_W-1:0];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_CLEAR;
      wp        <= '0;
      newest    <= '0;
      idx       <= '0;
      issuing   <= 1'b0;
      rd_valid  <= 1'b0;
      rd_last   <= 1'b0;
      finish    <= 1'b0;
      acc       <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      acc_out   <= '0;
    end else begin
      out_valid <= 1'b0;
      case (state)
        S_CLEAR: begin
          wp <= wp + 1'b1;
          if (wp == AW'(TAPS - 1)) state <= S_IDLE;
        end
        S_IDLE: begin
          if (accept) begin
            newest  <= wp;
            wp      <= wp + 1'b1;
            idx     <= '0;
            issuing <= 1'b1;
            acc     <= '0;
            state   <= S_RUN;
          end
        end
        S_RUN: begin
          // fetch stage
          rd_valid <= issuing;
          rd_last  <= issuing && (idx == AW'(TAPS - 1));
          if (issuing) begin
            idx <= idx + 1'b1;
            if (idx == AW'(TAPS - 1)) issuing <= 1'b0;
          end
          // accumulate stage
          if (rd_valid) acc <= acc + prod;
          finish <= rd_valid && rd_last;
          // output stage
          if (finish) begin
            out_valid <= 1'b1;
            out_data  <= sat;
            acc_out   <= acc;
            finish    <= 1'b0;
            rd_valid  <= 1'b0;
            rd_last   <= 1'b0;
            state     <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
