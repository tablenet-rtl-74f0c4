// tb_fp_lut_affine: a small binary16 layer (5 inputs, 2 per LUT, 3 outputs).
// The test table for element e, exponent field E and output p holds
// T = w[e][p] * 2^(E/8); the layer must return sum_e significand(x_e) *
// T(e, E_e, p) + b[p]*2^10 in its fixed-point format with 10 fraction bits.
// Inputs include zeros and subnormals; run length must be 11*G+2 cycles. A
// second unit with two parallel LUT banks (G = 2) runs on the same table.
module tb_fp_lut_affine;
  import tablenet_pkg::*;
  localparam int Q = 5, M = 2, P = 3, RO = 14;
  localparam int K = (Q + M - 1) / M;
  localparam int IW = 6 * M;
  localparam int DEPTH = K * (2 ** IW) + 1;
  localparam int AW = $clog2(DEPTH);
  localparam int ACC_W = RO + 11 + $clog2(K + 1) + 1;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_sub = 0;

  logic rst_n = 0, ld_en = 0, start = 0, busy, done;
  logic [AW-1:0] ld_addr = 0;
  logic [P*RO-1:0] ld_data = 0;
  fp16_t x [Q];
  logic signed [ACC_W-1:0] y [P];
  logic busy2, done2;
  logic signed [ACC_W-1:0] y2 [P];

  fp_lut_affine #(.Q(Q), .M(M), .P(P), .RO(RO)) dut (.*);
  fp_lut_affine #(.Q(Q), .M(M), .P(P), .RO(RO), .LANES(2)) dut2 (
    .clk, .rst_n, .ld_en, .ld_addr, .ld_data, .start, .x,
    .busy(busy2), .done(done2), .y(y2));

  int w [Q][P];
  int b [P];

  function automatic int tval(int e, int ex, int p);
    return w[e][p] * (2 ** (ex / 8));
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_tables();
    for (int s = 0; s < K; s++)
      for (int idx = 0; idx < 2 ** IW; idx++) begin
        ld_en = 1; ld_addr = AW'(s * (2 ** IW) + idx);
        for (int p = 0; p < P; p++) begin
          int v = 0;
          for (int j = 0; j < M; j++) begin
            int ex = (idx >> (5 * j)) & 31;
            if (((idx >> (5 * M + j)) & 1) != 0 && s * M + j < Q) v += tval(s*M+j, ex, p);
          end
          ld_data[p*RO +: RO] = RO'(v);
        end
        @(negedge clk);
      end
    ld_addr = AW'(K * (2 ** IW));
    for (int p = 0; p < P; p++) ld_data[p*RO +: RO] = RO'(b[p]);
    @(negedge clk);
    ld_en = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3; t++) begin
      for (int q = 0; q < Q; q++) for (int p = 0; p < P; p++) w[q][p] = $urandom_range(100) - 50;
      for (int p = 0; p < P; p++) b[p] = $urandom_range(200) - 100;
      load_tables();
      for (int r = 0; r < 10; r++) begin
        int cyc, c1, c2;
        for (int q = 0; q < Q; q++) begin
          x[q].sign = 1'b0;
          x[q].exp  = 5'($urandom_range(30));
          x[q].frac = 10'($urandom);
          if ($urandom_range(4) == 0) x[q].exp = '0;   // subnormal or zero
          if (x[q].exp == 0) n_sub++;
        end
        start = 1;
        @(negedge clk);
        start = 0;
        cyc = 1; c1 = 0; c2 = 0;
        while (c1 == 0 || c2 == 0) begin
          if (done && c1 == 0) c1 = cyc;
          if (done2 && c2 == 0) c2 = cyc;
          @(negedge clk);
          cyc++;
        end
        checks += 2;
        if (c1 - 1 != 11 * K + 2) begin failures++; $display("latency %0d", c1 - 1); end
        if (c2 - 1 != 11 * ((K + 1) / 2) + 2) begin failures++; $display("2-lane latency %0d", c2 - 1); end
        for (int p = 0; p < P; p++) begin
          longint want;
          want = longint'(b[p]) * 1024;
          for (int q = 0; q < Q; q++) begin
            int mant;
            mant = ((x[q].exp != 0) ? 1024 : 0) + int'(x[q].frac);
            want += longint'(mant) * tval(q, int'(x[q].exp), p);
          end
          checks += 2;
          if (longint'(y[p]) != want) begin
            failures++;
            $display("p=%0d y=%0d want %0d", p, y[p], want);
          end
          if (longint'(y2[p]) != want) begin
            failures++;
            $display("2 lanes: p=%0d y=%0d want %0d", p, y2[p], want);
          end
        end
      end
    end
    checks++;
    if (n_sub == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
