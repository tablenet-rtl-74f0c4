// tb_linear_classifier: the 784x10 linear classifier with 3-bit pixels, run
// on fxp_lut_affine in its two table partitions: 56 LUTs of 14 pixels
// (2^14 rows each, 17.5 MiB of table, 3*56 = 168 LUT reads per image) and
// 784 LUTs of one pixel (30.6 KiB, 2352 reads). Both units get tables built
// from the same random weights; for several images both must return W*x+b
// exactly, agree on the argmax label, and take 3*K+2 cycles.
module tb_linear_classifier;
  localparam int Q = 784, N = 3, P = 10, RO = 16;
  localparam int MA = 14, KA = Q / MA;     // 56 LUTs
  localparam int MB = 1,  KB = Q;          // 784 LUTs
  localparam int AWA = $clog2(KA * (2 ** MA) + 1);
  localparam int AWB = $clog2(KB * (2 ** MB) + 1);
  localparam int ACCA = RO + N + $clog2(KA + 1) + 1;
  localparam int ACCB = RO + N + $clog2(KB + 1) + 1;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n = 0, start = 0, ld_a = 0, ld_b = 0;
  logic [AWA-1:0] addr_a = 0;
  logic [AWB-1:0] addr_b = 0;
  logic [P*RO-1:0] data = 0;
  logic [N-1:0] x [Q];
  logic busy_a, done_a, busy_b, done_b;
  logic signed [ACCA-1:0] ya [P];
  logic signed [ACCB-1:0] yb [P];

  fxp_lut_affine #(.Q(Q), .N(N), .M(MA), .P(P), .RO(RO)) u_a (
    .clk, .rst_n, .ld_en(ld_a), .ld_addr(addr_a), .ld_data(data),
    .start, .is_signed(1'b0), .x, .busy(busy_a), .done(done_a), .y(ya));
  fxp_lut_affine #(.Q(Q), .N(N), .M(MB), .P(P), .RO(RO)) u_b (
    .clk, .rst_n, .ld_en(ld_b), .ld_addr(addr_b), .ld_data(data),
    .start, .is_signed(1'b0), .x, .busy(busy_b), .done(done_b), .y(yb));

  int w [Q][P];
  int b [P];

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, da, db;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int q = 0; q < Q; q++) for (int p = 0; p < P; p++) w[q][p] = $urandom_range(200) - 100;
    for (int p = 0; p < P; p++) b[p] = $urandom_range(2000) - 1000;
    // 14-pixel tables: row s*2^14 + bits = sum of the weights of the set bits
    ld_a = 1;
    for (int s = 0; s < KA; s++)
      for (int bits = 0; bits < 2 ** MA; bits++) begin
        addr_a = AWA'(s * (2 ** MA) + bits);
        for (int p = 0; p < P; p++) begin
          int v;
          v = 0;
          for (int j = 0; j < MA; j++) if (bits[j]) v += w[s*MA+j][p];
          data[p*RO +: RO] = RO'(v);
        end
        @(negedge clk);
      end
    addr_a = AWA'(KA * (2 ** MA));
    for (int p = 0; p < P; p++) data[p*RO +: RO] = RO'(b[p]);
    @(negedge clk);
    ld_a = 0;
    // one-pixel tables
    ld_b = 1;
    for (int s = 0; s < KB; s++)
      for (int bit_ = 0; bit_ < 2; bit_++) begin
        addr_b = AWB'(s * 2 + bit_);
        for (int p = 0; p < P; p++) data[p*RO +: RO] = RO'(bit_ ? w[s][p] : 0);
        @(negedge clk);
      end
    addr_b = AWB'(KB * 2);
    for (int p = 0; p < P; p++) data[p*RO +: RO] = RO'(b[p]);
    @(negedge clk);
    ld_b = 0;

    for (int img = 0; img < 4; img++) begin
      int la, lb, lw;
      longint want [P];
      for (int q = 0; q < Q; q++) x[q] = N'($urandom);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1; da = 0; db = 0;
      while (da == 0 || db == 0) begin
        if (done_a && da == 0) da = cyc;
        if (done_b && db == 0) db = cyc;
        @(negedge clk);
        cyc++;
      end
      checks += 2;
      if (da - 1 != N * KA + 2) begin failures++; $display("56-LUT run %0d cycles", da - 1); end
      if (db - 1 != N * KB + 2) begin failures++; $display("784-LUT run %0d cycles", db - 1); end
      la = 0; lb = 0; lw = 0;
      for (int p = 0; p < P; p++) begin
        want[p] = b[p];
        for (int q = 0; q < Q; q++) want[p] += longint'(w[q][p]) * longint'(x[q]);
        checks += 2;
        if (longint'(ya[p]) != want[p]) begin failures++; $display("56-LUT y[%0d]=%0d want %0d", p, ya[p], want[p]); end
        if (longint'(yb[p]) != want[p]) begin failures++; $display("784-LUT y[%0d]=%0d want %0d", p, yb[p], want[p]); end
        if (ya[p] > ya[la]) la = p;
        if (yb[p] > yb[lb]) lb = p;
        if (want[p] > want[lw]) lw = p;
      end
      checks++;
      if (la != lw || lb != lw) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
