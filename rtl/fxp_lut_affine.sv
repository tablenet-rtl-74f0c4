// fxp_lut_affine: multiplier-less y = W*x + b for a fixed-point input vector.
//
// The Q input elements (N bits each) are split into K = ceil(Q/M) segments of
// M consecutive elements. Writing each element as a sum of its bits,
// W*x = sum_j 2^j * (W * bitplane_j(x)), and W * bitplane_j(x) is the sum over
// the segments of a LUT lookup indexed by the M bits of plane j in that
// segment. Every bitplane reuses the same K LUTs; only the index changes.
// The planes are taken MSB first and combined Horner-style: at the start of
// each plane the accumulator is shifted left by one, then the plane's LUT
// rows are added. For two's-complement input (is_signed=1) the MSB plane is
// subtracted instead of added, which after the remaining N-1 shifts amounts
// to the "shift left n-1 bits and subtract" of the signed-number scheme.
// Finally the bias row is added once.
//
// LANES LUTs are read in parallel, from LANES memory banks: segment s lives
// in bank s mod LANES. The LANES rows read together are summed by an adder
// tree before they reach the accumulators. With LANES = 1 there is one
// memory and one row per cycle.
//
// LUT layout, as seen on the load port: row s*2^M + bits holds the P signed
// RO-bit entries of W restricted to segment s times the bit pattern `bits`
// (bit b belongs to element s*M+b). Row K*2^M holds the bias b. Entry p of a
// row sits at bits [p*RO +: RO]. The unit spreads the rows over its banks.
//
// Timing: G = ceil(K/LANES) reads per plane, N*G+1 reads per run. start is
// accepted at a clock edge where busy is low; done is high for one cycle
// after the (N*G+2)-th edge from there, busy is already low then, and y
// holds the result until the next start. x and is_signed must stay stable
// while busy. The table is written through ld_* while the unit is idle.
//
// Follows the paper: bitplane decomposition, shared LUT per plane, shift-and-
// add, MSB subtraction for signed input, LUTs read in parallel. Own choices:
// the banked time-sharing (LANES parameter, default 1), fixed-point LUT
// entries instead of binary16, and the bias kept in a row of its own rather
// than split as b/k over the LUTs.
module fxp_lut_affine #(
  parameter int unsigned Q     = 784,   // input elements
  parameter int unsigned N     = 8,     // bits per input element
  parameter int unsigned M     = 1,     // elements per LUT (segment size)
  parameter int unsigned P     = 1024,  // output elements
  parameter int unsigned RO    = 16,    // bits per LUT entry (signed)
  parameter int unsigned LANES = 1,     // LUTs read per cycle
  localparam int unsigned K     = (Q + M - 1) / M,
  localparam int unsigned DEPTH = K * (2 ** M) + 1,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned ACC_W = RO + N + $clog2(K + 1) + 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // table load port
  input  logic                    ld_en,
  input  logic [AW-1:0]           ld_addr,
  input  logic [P*RO-1:0]         ld_data,
  // operation
  input  logic                    start,
  input  logic                    is_signed,
  input  logic [N-1:0]            x [Q],
  output logic                    busy,
  output logic                    done,
  output logic signed [ACC_W-1:0] y [P]
);

  localparam int unsigned G      = (K + LANES - 1) / LANES;  // reads per plane
  localparam int unsigned BDEPTH = G * (2 ** M) + 1;         // rows per bank
  localparam int unsigned BAW    = $clog2(BDEPTH);
  localparam int unsigned GW     = (G > 1) ? $clog2(G) : 1;
  localparam int unsigned PW     = (N > 1) ? $clog2(N) : 1;

  // ---------------- issue side ----------------
  logic          issuing, bias_phase;
  logic [GW-1:0] grp;
  logic [PW-1:0] plane;
  logic [BAW-1:0] rd_addr [LANES];
  logic [LANES-1:0] lane_ok;

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      int unsigned s;
      logic [M-1:0] bits;
      s = int'(grp) * LANES + l;
      for (int b = 0; b < M; b++) begin
        int unsigned e;
        e = s * M + b;
        bits[b] = (e < Q) ? x[e][plane] : 1'b0;
      end
      lane_ok[l] = bias_phase ? (l == 0) : (s < K);
      rd_addr[l] = bias_phase ? BAW'(G * (2 ** M)) : BAW'((int'(grp) << M) + int'(bits));
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
      plane      <= PW'(N - 1);
    end else if (issuing) begin
      if (bias_phase) begin
        issuing    <= 1'b0;
        bias_phase <= 1'b0;
      end else if (32'(grp) == G - 1) begin
        grp <= '0;
        if (plane == '0) bias_phase <= 1'b1;
        else             plane      <= plane - 1'b1;
      end else begin
        grp <= grp + 1'b1;
      end
    end
  end

  // ---------------- read pipeline tags ----------------
  logic v1, first1, neg1, bias1;
  logic [LANES-1:0] ok1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; first1 <= 1'b0; neg1 <= 1'b0; bias1 <= 1'b0; ok1 <= '0;
    end else begin
      v1     <= issuing;
      first1 <= (grp == '0) && !bias_phase;
      neg1   <= is_signed && (32'(plane) == N - 1) && !bias_phase;
      bias1  <= bias_phase;
      ok1    <= lane_ok;
    end
  end

  // ---------------- LUT banks ----------------
  // load address s*2^M + bits goes to bank s mod LANES, row (s/LANES)*2^M +
  // bits; the bias row goes to bank 0, row G*2^M
  logic [P*RO-1:0] row [LANES];
  int unsigned     ld_seg, ld_bank, ld_row;

  always_comb begin
    ld_seg = int'(ld_addr) >> M;
    if (ld_seg >= K) begin
      ld_bank = 0;
      ld_row  = G * (2 ** M);
    end else begin
      ld_bank = ld_seg % LANES;
      ld_row  = ((ld_seg / LANES) << M) + (int'(ld_addr) % (2 ** M));
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

  // ---------------- adder tree and shift-and-add accumulators ----------------
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
        base = (first1 && !bias1) ? (y[p] <<< 1) : y[p];
        y[p] <= neg1 ? base - term : base + term;
      end
    end
  end

  assign busy = issuing || v1;

  // done rises with the edge that adds the bias, so y is final while it is high
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done <= 1'b0;
    else        done <= v1 && bias1;
  end

  // the table must not be rewritten during a run
  assert property (@(posedge clk) disable iff (!rst_n) busy |-> !ld_en)
    else $error("fxp_lut_affine: table load while busy");

endmodule
