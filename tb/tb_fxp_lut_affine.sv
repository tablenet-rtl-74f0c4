// tb_fxp_lut_affine: a small fixed-point layer (10 inputs of 4 bits, 3 inputs
// per LUT so the last LUT is padded, 3 outputs). Random weights and bias are
// turned into tables the way an offline builder would (row = sum of the
// weights whose bit is set); outputs are compared with W*x+b computed
// directly, for unsigned and two's-complement inputs, and the run length must
// be N*G+2 cycles. Two units run side by side on the same table and inputs:
// one reading one LUT per cycle (G = K) and one reading three LUTs per cycle
// from three banks (G = 2, the second group only partly filled).
module tb_fxp_lut_affine;
  localparam int Q = 10, N = 4, M = 3, P = 3, RO = 12;
  localparam int K = (Q + M - 1) / M;
  localparam int DEPTH = K * (2 ** M) + 1;
  localparam int AW = $clog2(DEPTH);
  localparam int ACC_W = RO + N + $clog2(K + 1) + 1;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int n_signed = 0, n_unsigned = 0;

  logic rst_n = 0, ld_en = 0, start = 0, is_signed = 0, busy, done;
  logic [AW-1:0] ld_addr = 0;
  logic [P*RO-1:0] ld_data = 0;
  logic [N-1:0] x [Q];
  logic signed [ACC_W-1:0] y [P];
  logic busy3, done3;
  logic signed [ACC_W-1:0] y3 [P];
  localparam int G3 = (K + 2) / 3;

  fxp_lut_affine #(.Q(Q), .N(N), .M(M), .P(P), .RO(RO)) dut (.*);
  fxp_lut_affine #(.Q(Q), .N(N), .M(M), .P(P), .RO(RO), .LANES(3)) dut3 (
    .clk, .rst_n, .ld_en, .ld_addr, .ld_data, .start, .is_signed, .x,
    .busy(busy3), .done(done3), .y(y3));

  int w [Q][P];
  int b [P];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_tables();
    for (int s = 0; s < K; s++)
      for (int bits = 0; bits < 2 ** M; bits++) begin
        ld_en = 1; ld_addr = AW'(s * (2 ** M) + bits);
        for (int p = 0; p < P; p++) begin
          int v = 0;
          for (int j = 0; j < M; j++)
            if (bits[j] && s * M + j < Q) v += w[s*M+j][p];
          ld_data[p*RO +: RO] = RO'(v);
        end
        @(negedge clk);
      end
    ld_addr = AW'(K * (2 ** M));
    for (int p = 0; p < P; p++) ld_data[p*RO +: RO] = RO'(b[p]);
    @(negedge clk);
    ld_en = 0;
  endtask

  task automatic run(input bit sgn);
    int cyc, c1, c3;
    is_signed = sgn;
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1; c1 = 0; c3 = 0;
    while (c1 == 0 || c3 == 0) begin
      if (done && c1 == 0) c1 = cyc;
      if (done3 && c3 == 0) c3 = cyc;
      @(negedge clk);
      cyc++;
    end
    // done is seen at the negedge after the edge that raised it
    checks += 2;
    if (c1 - 1 != N * K + 2) begin failures++; $display("latency %0d want %0d", c1 - 1, N*K+2); end
    if (c3 - 1 != N * G3 + 2) begin failures++; $display("3-lane latency %0d want %0d", c3 - 1, N*G3+2); end
    for (int p = 0; p < P; p++) begin
      longint want = b[p];
      for (int q = 0; q < Q; q++) begin
        int xv = sgn ? int'($signed(x[q])) : int'(x[q]);
        want += longint'(w[q][p]) * xv;
      end
      checks += 2;
      if (longint'(y[p]) != want) begin
        failures++;
        $display("signed=%0d p=%0d y=%0d want %0d", sgn, p, y[p], want);
      end
      if (longint'(y3[p]) != want) begin
        failures++;
        $display("3 lanes: signed=%0d p=%0d y=%0d want %0d", sgn, p, y3[p], want);
      end
    end
    if (sgn) n_signed++; else n_unsigned++;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      for (int q = 0; q < Q; q++) for (int p = 0; p < P; p++) w[q][p] = $urandom_range(120) - 60;
      for (int p = 0; p < P; p++) b[p] = $urandom_range(400) - 200;
      load_tables();
      for (int r = 0; r < 8; r++) begin
        for (int q = 0; q < Q; q++) x[q] = N'($urandom);
        if (r == 0) for (int q = 0; q < Q; q++) x[q] = '1;
        run(r[0]);
      end
    end
    checks++;
    if (n_signed == 0 || n_unsigned == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
