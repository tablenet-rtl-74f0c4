// fp_lut_affine: multiplier-less y = W*x + b for a binary16 input vector.
//
// Each binary16 element is significand * 2^exponent. The 11-bit significand
// (implicit bit included) is split into 11 bitplanes, but the exponent cannot
// be split, so every LUT is indexed by one bitplane of its M elements together
// with the full 5-bit exponents of those M elements: 6*M index bits. The same
// LUT serves all 11 planes. The planes are taken LSB first; before a new
// plane the running sum is shifted right by one bit, then the plane's LUT
// rows are added, as in the chain "LUT -> right shift 1 bit -> + -> ..." of
// the floating-point scheme. The result therefore weights plane j by
// 2^(j-10). To keep the right shifts exact the accumulator carries FR = 10
// fraction bits below the LUT entry's LSB. The sign bit is not used: the
// inputs are ReLU outputs and so nonnegative.
//
// LANES LUTs are read in parallel from LANES banks (segment s in bank
// s mod LANES) and summed by an adder tree; LANES = 1 gives one read per
// cycle.
//
// LUT layout, as seen on the load port: LUT s occupies rows s*2^(6M) ..
// +2^(6M)-1; the row address inside it is {bits[M-1:0], exp[M-1], ...,
// exp[0]}, where bits[b] is the plane bit and exp[b] the exponent field of
// element s*M+b. The row holds the P signed RO-bit values that the offline
// table builder computed for that pattern (W restricted to segment s times
// the pattern's values, the plane's significand weight taken as 1). Row
// K*2^(6M) holds the bias. Entry p sits at bits [p*RO +: RO].
//
// Timing: G = ceil(K/LANES) reads per plane, 11*G+1 per run. start is
// accepted at an edge where busy is low; done is high for one cycle after the
// (11*G+2)-th edge from there, when busy is already low. y (signed, FR
// fraction bits) holds the result from done to the next start; x must stay
// stable while busy.
//
// Follows the paper: mantissa bitplanes plus whole exponent as LUT index, one
// LUT shared by all planes, right-shift-by-one and add, parallel LUTs. Own
// choices: banked time-sharing (LANES, default 1), fixed-point LUT entries
// and accumulator, bias row.
module fp_lut_affine
  import tablenet_pkg::*;
#(
  parameter int unsigned Q     = 1024,  // input elements
  parameter int unsigned M     = 1,     // elements per LUT (segment size)
  parameter int unsigned P     = 512,   // output elements
  parameter int unsigned RO    = 16,    // bits per LUT entry (signed)
  parameter int unsigned LANES = 1,     // LUTs read per cycle
  localparam int unsigned NPL   = FP16_MANT_W,          // 11 bitplanes
  localparam int unsigned FR    = NPL - 1,              // fraction bits of y
  localparam int unsigned IW    = M * (1 + FP16_EXP_W), // index bits per LUT
  localparam int unsigned K     = (Q + M - 1) / M,
  localparam int unsigned DEPTH = K * (2 ** IW) + 1,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned ACC_W = RO + NPL + $clog2(K + 1) + 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    ld_en,
  input  logic [AW-1:0]           ld_addr,
  input  logic [P*RO-1:0]         ld_data,
  input  logic                    start,
  input  fp16_t                   x [Q],
  output logic                    busy,
  output logic                    done,
  output logic signed [ACC_W-1:0] y [P]
);

  localparam int unsigned G      = (K + LANES - 1) / LANES;
  localparam int unsigned BDEPTH = G * (2 ** IW) + 1;
  localparam int unsigned BAW    = $clog2(BDEPTH);
  localparam int unsigned GW     = (G > 1) ? $clog2(G) : 1;
  localparam int unsigned PW     = $clog2(NPL);

  logic             issuing, bias_phase;
  logic [GW-1:0]    grp;
  logic [PW-1:0]    plane;
  logic [BAW-1:0]   rd_addr [LANES];
  logic [LANES-1:0] lane_ok;

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      int unsigned s;
      logic [IW-1:0] idx;
      s   = int'(grp) * LANES + l;
      idx = '0;
      for (int b = 0; b < M; b++) begin
        int unsigned e;
        logic [NPL-1:0] mant;
        e    = s * M + b;
        mant = '0;
        if (e < Q) begin
          mant = fp16_mant(x[e]);
          idx[M*FP16_EXP_W + b]           = mant[plane];
          idx[b*FP16_EXP_W +: FP16_EXP_W] = x[e].exp;
        end
      end
      lane_ok[l] = bias_phase ? (l == 0) : (s < K);
      rd_addr[l] = bias_phase ? BAW'(G * (2 ** IW)) : BAW'((int'(grp) << IW) + int'(idx));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing    <= 1'b0;
      bias_phase <= 1'b0;
      grp        <= '0;
      plane      <= '0;
    end else if (start && !busy) begin
      issuing    <= 1'b1;
      bias_phase <= 1'b0;
      grp        <= '0;
      plane      <= '0;
    end else if (issuing) begin
      if (bias_phase) begin
        issuing    <= 1'b0;
        bias_phase <= 1'b0;
      end else if (32'(grp) == G - 1) begin
        grp <= '0;
        if (32'(plane) == NPL - 1) bias_phase <= 1'b1;
        else                       plane      <= plane + 1'b1;
      end else begin
        grp <= grp + 1'b1;
      end
    end
  end

  logic v1, first1, bias1;
  logic [LANES-1:0] ok1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; first1 <= 1'b0; bias1 <= 1'b0; ok1 <= '0;
    end else begin
      v1     <= issuing;
      first1 <= (grp == '0) && !bias_phase;
      bias1  <= bias_phase;
      ok1    <= lane_ok;
    end
  end

  // load address s*2^IW + idx goes to bank s mod LANES, row (s/LANES)*2^IW +
  // idx; the bias row goes to bank 0, row G*2^IW
  logic [P*RO-1:0] row [LANES];
  int unsigned     ld_seg, ld_bank, ld_row;

  always_comb begin
    ld_seg = int'(ld_addr) >> IW;
    if (ld_seg >= K) begin
      ld_bank = 0;
      ld_row  = G * (2 ** IW);
    end else begin
      ld_bank = ld_seg % LANES;
      ld_row  = ((ld_seg / LANES) << IW) + (int'(ld_addr) % (2 ** IW));
    end
  end

  for (genvar l = 0; l < LANES; l++) begin : g_bank
    lut_bank #(.DEPTH(BDEPTH), .WIDTH(P*RO)) u_lut (
      .clk,
      .wr_en  (ld_en && !busy && ld_bank == l),
      .wr_addr(BAW'(ld_row)),
      .wr_data(ld_data),
      .rd_en  (issuing && lane_ok[l]),
      .rd_addr(rd_addr[l]),
      .rd_data(row[l])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < P; p++) y[p] <= '0;
    end else if (start && !busy) begin
      for (int p = 0; p < P; p++) y[p] <= '0;
    end else if (v1) begin
      for (int p = 0; p < P; p++) begin
        logic signed [ACC_W-1:0] base, term;
        term = '0;
        for (int l = 0; l < LANES; l++)
          if (ok1[l]) term = term + ACC_W'($signed(row[l][p*RO +: RO]));
        base = (first1 && !bias1) ? (y[p] >>> 1) : y[p];
        y[p] <= base + (term <<< FR);
      end
    end
  end

  assign busy = issuing || v1;

  // done rises with the edge that adds the bias, so y is final while it is high
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done <= 1'b0;
    else        done <= v1 && bias1;
  end

  assert property (@(posedge clk) disable iff (!rst_n) busy |-> !ld_en)
    else $error("fp_lut_affine: table load while busy");

endmodule
