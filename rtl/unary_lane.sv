// unary_lane: one temporal-unary conversion lane of a column or row counter.
//
// The lane holds a W-bit two's-complement value and moves it one step towards
// zero (down when positive, up when negative) on every cycle that `step` is
// high. While the value is non-zero `unary` is high, so a value v yields a
// pulse |v| steps long; `neg` is high while the value is negative, i.e. while
// the loaded value was negative. `load` has priority over `step`.
// `last` is high when |value| <= 1, that is, the lane will be zero after its
// next step. Reset clears the value. One flip-flop stage; outputs are
// combinational from the register.
module unary_lane #(
  parameter int unsigned W = tugemm_pkg::DEF_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                load,
  input  logic                step,
  input  logic signed [W-1:0] din,
  output logic                unary,
  output logic                neg,
  output logic                last
);
  logic signed [W-1:0] cnt;

  always_ff @(posedge clk) begin
    if (!rst_n)                cnt <= '0;
    else if (load)             cnt <= din;
    else if (step && unary)    cnt <= neg ? cnt + W'(1) : cnt - W'(1);
  end

  assign unary = (cnt != '0);
  assign neg   = cnt[W-1];
  assign last  = (cnt == '0) || (cnt == W'(1)) || (cnt == {W{1'b1}});
endmodule
