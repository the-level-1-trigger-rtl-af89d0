// sync_fifo: single-clock first-in first-out buffer with show-ahead output.
//
// DEPTH entries of WIDTH bits held in an array; `dout` always shows the oldest
// entry (valid when !empty). A push when full and a pop when empty are ignored
// and flagged by assertions. Push and pop in the same clock are allowed.
// count is the number of stored entries, 0..DEPTH.
module sync_fifo #(
  parameter int WIDTH = 8,
  parameter int DEPTH = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      push,
  input  logic [WIDTH-1:0]          din,
  input  logic                      pop,
  output logic [WIDTH-1:0]          dout,
  output logic [$clog2(DEPTH+1)-1:0] count,
  output logic                      full,
  output logic                      empty
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;

  assign full  = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign empty = (count == '0);
  assign dout  = mem[rp];

  wire do_push = push && !full;
  wire do_pop  = pop && !empty;

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= din;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (do_push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + ($bits(count))'(do_push) - ($bits(count))'(do_pop);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(push && full))  else $error("sync_fifo: push while full");
  assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty)) else $error("sync_fifo: pop while empty");
endmodule
