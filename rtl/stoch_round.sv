// stoch_round: stochastic rounding through a look-up table and a counter.
//
// x is a fixed-point number with D fraction bits; the result is x rounded to
// an integer (grid step eps = 1): floor(x) if r(i) <= 1 + (floor(x)-x)/eps,
// else floor(x)+eps, where r(i) is the i-th of R numbers in (0,1] and i is
// advanced modulo R on each access. Because the decision depends only on the
// D fraction bits and i, the table is stored in factored form: a 1-bit entry
// per (i, fraction) pair says "round up", and the integer part is incremented
// by that bit. The table has R*2^D bits.
//
// r(i) = u(i)/2^D with u(i) = (i*STEP mod 2^D) + 1. STEP is odd, so when R =
// 2^D every value 1..2^D appears once per period (a simple 1-D dither) and the
// mean rounding error over a period is exactly zero. With f the fraction in
// units of 2^-D, the rule becomes: round up iff u(i) + f > 2^D.
//
// Timing: y is combinational in x and the current index; a high `en` at a
// clock edge moves the index to the next entry. Reset sets i = 0.
module stoch_round #(
  parameter int unsigned W = 11,  // integer bits of x
  parameter int unsigned D = 4,   // fraction bits of x
  parameter int unsigned R = 16   // length of the random sequence
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           en,
  input  logic [W+D-1:0] x,
  output logic [W:0]     y,
  output logic [$clog2(R)-1:0] idx
);

  localparam int unsigned ONE  = 2 ** D;
  localparam int unsigned STEP = ((ONE * 618) / 1000) | 1;

  // bit i*2^D + f of the table: round up for index i and fraction f
  typedef logic [R*ONE-1:0] tab_t;

  function automatic tab_t build_table();
    tab_t t;
    t = '0;
    for (int i = 0; i < R; i++) begin
      int unsigned u;
      u = ((i * STEP) % ONE) + 1;
      for (int f = 0; f < ONE; f++) t[i*ONE + f] = (u + f > ONE);
    end
    return t;
  endfunction

  localparam tab_t TAB = build_table();

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  idx <= '0;
    else if (en) idx <= (32'(idx) == R - 1) ? '0 : idx + 1'b1;
  end

  assign y = {1'b0, x[W+D-1:D]} + (W+1)'(TAB[{idx, x[D-1:0]}]);

endmodule
