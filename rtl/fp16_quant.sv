// fp16_quant: converts a nonnegative fixed-point layer output to binary16.
//
// The input v stands for the value v * 2^-SCALE. The leading one of v gives
// the binary exponent; the 11 bits from the leading one down become the
// significand (implicit bit plus 10 fraction bits), and the next D bits go to
// the rounding stage. Values below the smallest normal (2^-14) become
// subnormals with exponent field 0 and significand v*2^(24-SCALE). Rounding
// is either truncation or stochastic rounding through stoch_round; a carry out
// of the significand moves into the exponent field by plain addition of the
// packed {exponent, fraction} word. Results above the largest finite binary16
// value saturate to 0x7BFF and raise `sat`; there are no infinities or NaNs.
//
// Timing: h and sat are combinational in v and mode. A high `en` at a clock
// edge marks that the value was taken and advances the stochastic rounding
// sequence (only in RND_STOCH mode).
module fp16_quant
  import tablenet_pkg::*;
#(
  parameter int unsigned VW    = 35,  // input width
  parameter int          SCALE = 8,   // value = v * 2^-SCALE
  parameter int unsigned D     = 4    // rounding fraction bits
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  rnd_mode_e     mode,
  input  logic [VW-1:0] v,
  output fp16_t         h,
  output logic          sat
);

  localparam int unsigned KW = FP16_MANT_W + D;   // kept + rounding bits

  logic [KW-1:0]          kept;
  logic [FP16_MANT_W:0]   rounded;
  logic signed [31:0]     e_field;
  logic                   zero, normal;

  always_comb begin
    int p, sh;
    logic [VW+D-1:0] ext;
    p = 0;
    for (int i = 0; i < VW; i++) if (v[i]) p = i;
    zero    = (v == '0);
    e_field = p - SCALE + FP16_BIAS;
    normal  = (e_field >= 1);
    sh      = normal ? (p - FP16_FRAC_W) : (SCALE - 24);
    ext     = {v, D'(0)};
    if (sh >= 0) ext = ext >> sh;
    else         ext = ext << (-sh);
    kept    = ext[KW-1:0];
  end

  logic [FP16_MANT_W:0] sr_y;
  logic [D-1:0]         sr_idx;  // sequence position, not needed here
  stoch_round #(.W(FP16_MANT_W), .D(D), .R(2 ** D)) u_sr (
    .clk, .rst_n,
    .en (en && mode == RND_STOCH),
    .x  (kept),
    .y  (sr_y),
    .idx(sr_idx)
  );

  always_comb begin
    logic [31:0] packed_hf;
    rounded = (mode == RND_STOCH) ? sr_y : {1'b0, kept[KW-1:D]};
    if (normal) packed_hf = 32'((e_field - 1) << FP16_FRAC_W) + 32'(rounded);
    else        packed_hf = 32'(rounded);
    sat = 1'b0;
    if (zero) begin
      h = '0;
    end else if (e_field >= 31 || packed_hf >= 32'h7C00) begin
      h   = FP16_MAX;
      sat = 1'b1;
    end else begin
      h = fp16_t'(packed_hf[15:0]);
    end
  end

endmodule
