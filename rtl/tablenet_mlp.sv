// tablenet_mlp: a 784-1024-512-10 multilayer perceptron evaluated with
// look-up tables and adders only, no multipliers.
//
// Datapath, one image at a time:
//   x (784 pixels, 8-bit fixed point, registered at start)
//   -> layer 1: fxp_lut_affine, 784 one-element LUTs, 8 bitplanes
//   -> ReLU + conversion to binary16 (fp16_quant), one value per cycle, into h1
//   -> layer 2: fp_lut_affine on h1, 1024 LUTs, 11 significand bitplanes
//   -> ReLU + binary16 conversion into h2
//   -> layer 3: fp_lut_affine on h2, 512 LUTs
//   -> argmax over the 10 scores -> label
// A controller runs the stages in sequence; each layer's unit reads LANES
// of its LUTs per cycle (one with the default LANES = 1).
//
// Table loading: while idle, the host writes rows into the layer picked by
// ld_layer (1, 2 or 3) at ld_addr; a row's low P*16 bits are used, P being
// the layer's output count. Row layouts are described in fxp_lut_affine and
// fp_lut_affine.
//
// Timing: a layer stage takes planes*ceil(K/LANES)+4 cycles (K LUTs, 8 or 11
// planes; the 4 are the start handshake, the bias row, the read latency and
// the hand-over), a conversion pass one cycle per value, and the final stage
// one cycle. With the defaults done rises 8*784+4 + 1024 + 11*1024+4 + 512 +
// 11*512+4 + 1 = 24717 clock edges after the edge that accepts start; label
// and scores are valid while done is high and hold until the next start.
//
// in_signed selects two's-complement input pixels (layer 1 then subtracts
// the MSB plane); rnd_mode selects truncation or stochastic rounding for the
// binary16 conversions. SCALE1/SCALE2 fix where the binary point of the layer
// 1 and layer 2 outputs lies for the conversion; they must match the tables.
//
// Layer sizes, the 8-bit fixed-point input, binary16 hidden activations with
// 11 bitplanes and the whole exponent in the LUT index, and one-element LUTs
// (2320 LUTs in all) follow the paper's MLP, as does reading several LUTs in
// parallel. The fixed-point table entries, the sequential schedule, the
// banking of the LUTs (LANES), the binary-point choices and the saturation
// on binary16 overflow are this design's own.
module tablenet_mlp
  import tablenet_pkg::*;
#(
  parameter int unsigned NIN    = 784,   // input pixels
  parameter int unsigned NBITS  = 8,     // bits per pixel
  parameter int unsigned H1     = 1024,  // layer 1 outputs
  parameter int unsigned H2     = 512,   // layer 2 outputs
  parameter int unsigned NOUT   = 10,    // classes
  parameter int unsigned M1     = 1,     // elements per LUT, layer 1
  parameter int unsigned M2     = 1,     // elements per LUT, layer 2
  parameter int unsigned M3     = 1,     // elements per LUT, layer 3
  parameter int unsigned RO     = 16,    // bits per LUT entry
  parameter int unsigned LANES  = 1,     // LUTs read per cycle in each layer
  parameter int          SCALE1 = 8,     // layer 1 output = y1 * 2^-SCALE1
  parameter int          SCALE2 = 18,    // layer 2 output = y2 * 2^-SCALE2
  localparam int unsigned K1  = (NIN + M1 - 1) / M1,
  localparam int unsigned K2  = (H1 + M2 - 1) / M2,
  localparam int unsigned K3  = (H2 + M3 - 1) / M3,
  localparam int unsigned AW1 = $clog2(K1 * (2 ** M1) + 1),
  localparam int unsigned AW2 = $clog2(K2 * (2 ** (6 * M2)) + 1),
  localparam int unsigned AW3 = $clog2(K3 * (2 ** (6 * M3)) + 1),
  localparam int unsigned LAW = (AW1 > AW2) ? ((AW1 > AW3) ? AW1 : AW3)
                                            : ((AW2 > AW3) ? AW2 : AW3),
  localparam int unsigned PMAX = (H1 > H2) ? ((H1 > NOUT) ? H1 : NOUT)
                                           : ((H2 > NOUT) ? H2 : NOUT),
  localparam int unsigned W1  = RO + NBITS + $clog2(K1 + 1) + 1,
  localparam int unsigned W2  = RO + FP16_MANT_W + $clog2(K2 + 1) + 1,
  localparam int unsigned W3  = RO + FP16_MANT_W + $clog2(K3 + 1) + 1,
  localparam int unsigned LW  = (NOUT > 1) ? $clog2(NOUT) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // table load
  input  logic                 ld_en,
  input  logic [1:0]           ld_layer,
  input  logic [LAW-1:0]       ld_addr,
  input  logic [PMAX*RO-1:0]   ld_data,
  // inference
  input  logic                 start,
  input  logic                 in_signed,
  input  rnd_mode_e            rnd_mode,
  input  logic [NBITS-1:0]     x [NIN],
  output logic                 busy,
  output logic                 done,
  output logic [LW-1:0]        label,
  output logic signed [W3-1:0] scores [NOUT],
  output logic                 sat_seen   // a binary16 conversion saturated
);

  typedef enum logic [2:0] {
    S_IDLE, S_L1, S_Q1, S_L2, S_Q2, S_L3, S_DONE
  } state_e;

  state_e state;

  logic [NBITS-1:0] xin [NIN];
  fp16_t            h1  [H1];
  fp16_t            h2  [H2];
  logic             sgn;
  rnd_mode_e        mode;

  logic [$clog2(H1)-1:0] qi;

  // ---------------- layers ----------------
  logic l1_start, l1_busy, l1_done;
  logic l2_start, l2_busy, l2_done;
  logic l3_start, l3_busy, l3_done;
  logic signed [W1-1:0] y1 [H1];
  logic signed [W2-1:0] y2 [H2];
  logic signed [W3-1:0] y3 [NOUT];

  fxp_lut_affine #(.Q(NIN), .N(NBITS), .M(M1), .P(H1), .RO(RO), .LANES(LANES)) u_l1 (
    .clk, .rst_n,
    .ld_en  (ld_en && ld_layer == 2'd1 && state == S_IDLE),
    .ld_addr(AW1'(ld_addr)),
    .ld_data(ld_data[H1*RO-1:0]),
    .start  (l1_start), .is_signed(sgn), .x(xin),
    .busy   (l1_busy), .done(l1_done), .y(y1)
  );

  fp_lut_affine #(.Q(H1), .M(M2), .P(H2), .RO(RO), .LANES(LANES)) u_l2 (
    .clk, .rst_n,
    .ld_en  (ld_en && ld_layer == 2'd2 && state == S_IDLE),
    .ld_addr(AW2'(ld_addr)),
    .ld_data(ld_data[H2*RO-1:0]),
    .start  (l2_start), .x(h1),
    .busy   (l2_busy), .done(l2_done), .y(y2)
  );

  fp_lut_affine #(.Q(H2), .M(M3), .P(NOUT), .RO(RO), .LANES(LANES)) u_l3 (
    .clk, .rst_n,
    .ld_en  (ld_en && ld_layer == 2'd3 && state == S_IDLE),
    .ld_addr(AW3'(ld_addr)),
    .ld_data(ld_data[NOUT*RO-1:0]),
    .start  (l3_start), .x(h2),
    .busy   (l3_busy), .done(l3_done), .y(y3)
  );

  // ---------------- ReLU and binary16 conversion ----------------
  logic signed [W1-1:0] q1_in [1];
  logic        [W1-1:0] q1_r  [1];
  logic signed [W2-1:0] q2_in [1];
  logic        [W2-1:0] q2_r  [1];
  fp16_t                q1_h, q2_h;
  logic                 q1_sat, q2_sat;

  assign q1_in[0] = y1[qi];
  assign q2_in[0] = y2[qi[$clog2(H2)-1:0]];

  relu #(.W(W1), .N(1)) u_relu1 (.a(q1_in), .y(q1_r));
  relu #(.W(W2), .N(1)) u_relu2 (.a(q2_in), .y(q2_r));

  fp16_quant #(.VW(W1), .SCALE(SCALE1)) u_q1 (
    .clk, .rst_n, .en(state == S_Q1), .mode, .v(q1_r[0]), .h(q1_h), .sat(q1_sat)
  );
  fp16_quant #(.VW(W2), .SCALE(SCALE2)) u_q2 (
    .clk, .rst_n, .en(state == S_Q2), .mode, .v(q2_r[0]), .h(q2_h), .sat(q2_sat)
  );

  // ---------------- classification ----------------
  logic [LW-1:0] am_idx;
  logic signed [W3-1:0] am_max;
  argmax #(.P(NOUT), .W(W3)) u_argmax (.a(y3), .idx(am_idx), .max(am_max));

  // ---------------- controller ----------------
  always_comb begin
    l1_start = (state == S_L1) && !l1_busy && !l1_done;
    l2_start = (state == S_L2) && !l2_busy && !l2_done;
    l3_start = (state == S_L3) && !l3_busy && !l3_done;
  end

  // each layer is started once: a stage's first cycle starts it, so a flag
  // records that it is already running
  logic launched;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      qi       <= '0;
      sgn      <= 1'b0;
      mode     <= RND_TRUNC;
      label    <= '0;
      done     <= 1'b0;
      sat_seen <= 1'b0;
      launched <= 1'b0;
      for (int i = 0; i < NOUT; i++) scores[i] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state    <= S_L1;
          sgn      <= in_signed;
          mode     <= rnd_mode;
          sat_seen <= 1'b0;
          launched <= 1'b0;
        end
        S_L1: begin
          launched <= 1'b1;
          if (launched && l1_done) begin state <= S_Q1; qi <= '0; launched <= 1'b0; end
        end
        S_Q1: begin
          if (q1_sat) sat_seen <= 1'b1;
          if (32'(qi) == H1 - 1) begin state <= S_L2; qi <= '0; end
          else qi <= qi + 1'b1;
        end
        S_L2: begin
          launched <= 1'b1;
          if (launched && l2_done) begin state <= S_Q2; qi <= '0; launched <= 1'b0; end
        end
        S_Q2: begin
          if (q2_sat) sat_seen <= 1'b1;
          if (32'(qi) == H2 - 1) begin state <= S_L3; qi <= '0; end
          else qi <= qi + 1'b1;
        end
        S_L3: begin
          launched <= 1'b1;
          if (launched && l3_done) begin state <= S_DONE; launched <= 1'b0; end
        end
        S_DONE: begin
          label <= am_idx;
          for (int i = 0; i < NOUT; i++) scores[i] <= y3[i];
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // input and activation buffers
  always_ff @(posedge clk) begin
    if (state == S_IDLE && start) xin <= x;
    if (state == S_Q1) h1[qi] <= q1_h;
    if (state == S_Q2) h2[qi[$clog2(H2)-1:0]] <= q2_h;
  end

  assign busy = (state != S_IDLE);

  assert property (@(posedge clk) disable iff (!rst_n) ld_en |-> state == S_IDLE)
    else $error("tablenet_mlp: table load while busy");

endmodule
