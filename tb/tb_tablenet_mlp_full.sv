// tb_tablenet_mlp_full: complete classifications with the design at its
// default size: 784 pixels, 1024 and 512 hidden units, 10 classes, 2320
// one-element LUTs (about 68 MiB of table). All tables are built from random
// weights and loaded; one image is classified with unsigned pixels and
// truncating rounding, a second with signed pixels and stochastic rounding,
// and both are compared with the reference model as in tb_tablenet_mlp.
module tb_tablenet_mlp_full;
  import tablenet_pkg::*;
  import tb_fp16_pkg::*;

  localparam int NIN = 784, NBITS = 8, H1 = 1024, H2 = 512, NOUT = 10, RO = 16;
  localparam int SCALE1 = 8, SCALE2 = 18;          // the design's defaults
  localparam int NIMG = 2;                      // images
  localparam int WATCHDOG = 300000;
  localparam int K1 = NIN, K2 = H1, K3 = H2;    // one element per LUT
  localparam int W1 = RO + NBITS + $clog2(K1 + 1) + 1;
  localparam int W2 = RO + 11 + $clog2(K2 + 1) + 1;
  localparam int W3 = RO + 11 + $clog2(K3 + 1) + 1;
  localparam int LAW = $clog2(K2 * 64 + 1) > $clog2(K1 * 2 + 1) ?
                       ($clog2(K2 * 64 + 1) > $clog2(K3 * 64 + 1) ? $clog2(K2 * 64 + 1) : $clog2(K3 * 64 + 1)) :
                       ($clog2(K1 * 2 + 1) > $clog2(K3 * 64 + 1) ? $clog2(K1 * 2 + 1) : $clog2(K3 * 64 + 1));
  localparam int PMAX = (H1 > H2) ? ((H1 > NOUT) ? H1 : NOUT) : ((H2 > NOUT) ? H2 : NOUT);

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n = 0, ld_en = 0, start = 0, in_signed = 0, busy, done, sat_seen;
  logic [1:0] ld_layer = 0;
  logic [LAW-1:0] ld_addr = 0;
  logic [PMAX*RO-1:0] ld_data = 0;
  rnd_mode_e rnd_mode = RND_TRUNC;
  logic [NBITS-1:0] x [NIN];
  logic [$clog2(NOUT)-1:0] label;
  logic signed [W3-1:0] scores [NOUT];

  tablenet_mlp dut (.*);

  int w1 [NIN][H1];
  int b1 [H1];
  int w2 [H1][H2];
  int b2 [H2];
  int w3 [H2][NOUT];
  int b3 [NOUT];
  int seq1 = 0, seq2 = 0;     // stochastic rounding positions of the two converters

  // mechanism counters
  int n_signed = 0, n_unsigned = 0, n_trunc = 0, n_stoch = 0;
  int n_up = 0, n_clip = 0, n_sat = 0, n_sub = 0;

  // test table for a binary16 layer: weight times a power of two set by the
  // exponent field
  function automatic int tval(int w, int ex);
    return w * (2 ** (ex / 4));
  endfunction

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_row(input int layer, input int addr);
    ld_en = 1; ld_layer = 2'(layer); ld_addr = LAW'(addr);
    @(negedge clk);
  endtask

  task automatic load_tables();
    // layer 1: one element per LUT, rows {s, bit}, then the bias
    for (int s = 0; s < K1; s++)
      for (int bit_ = 0; bit_ < 2; bit_++) begin
        ld_data = '0;
        for (int p = 0; p < H1; p++) ld_data[p*RO +: RO] = RO'(bit_ ? w1[s][p] : 0);
        load_row(1, s * 2 + bit_);
      end
    ld_data = '0;
    for (int p = 0; p < H1; p++) ld_data[p*RO +: RO] = RO'(b1[p]);
    load_row(1, K1 * 2);
    // layer 2: rows {s, bit, exponent}
    for (int s = 0; s < K2; s++)
      for (int idx = 0; idx < 64; idx++) begin
        ld_data = '0;
        for (int p = 0; p < H2; p++) ld_data[p*RO +: RO] = RO'((idx >= 32) ? tval(w2[s][p], idx % 32) : 0);
        load_row(2, s * 64 + idx);
      end
    ld_data = '0;
    for (int p = 0; p < H2; p++) ld_data[p*RO +: RO] = RO'(b2[p]);
    load_row(2, K2 * 64);
    // layer 3
    for (int s = 0; s < K3; s++)
      for (int idx = 0; idx < 64; idx++) begin
        ld_data = '0;
        for (int p = 0; p < NOUT; p++) ld_data[p*RO +: RO] = RO'((idx >= 32) ? tval(w3[s][p], idx % 32) : 0);
        load_row(3, s * 64 + idx);
      end
    ld_data = '0;
    for (int p = 0; p < NOUT; p++) ld_data[p*RO +: RO] = RO'(b3[p]);
    load_row(3, K3 * 64);
    ld_en = 0;
  endtask

  function automatic int mant(logic [15:0] h);
    return ((h[14:10] != 0) ? 1024 : 0) + int'(h[9:0]);
  endfunction

  task automatic classify(input bit sgn, input bit stoch);
    logic [15:0] h1 [H1];
    logic [15:0] h2 [H2];
    longint y3 [NOUT];
    int cyc, want_label, want_cyc;
    bit sat, any_sat;

    // ---- reference model ----
    any_sat = 0;
    for (int p = 0; p < H1; p++) begin
      longint acc;
      acc = b1[p];
      for (int q = 0; q < NIN; q++)
        acc += longint'(w1[q][p]) * (sgn ? longint'($signed(x[q])) : longint'(x[q]));
      if (acc < 0) begin n_clip++; acc = 0; end
      h1[p] = fp16_convert(real'(acc) * (2.0 ** -SCALE1), stoch, seq1, 4, sat);
      if (stoch && h1[p] != fp16_floor(real'(acc) * (2.0 ** -SCALE1))) n_up++;
      if (stoch) seq1 = (seq1 + 1) % 16;
      any_sat |= sat;
      if (h1[p][14:10] == 0 && h1[p] != 0) n_sub++;
    end
    for (int p = 0; p < H2; p++) begin
      longint acc;
      acc = longint'(b2[p]) * 1024;
      for (int e = 0; e < H1; e++) acc += longint'(mant(h1[e])) * tval(w2[e][p], int'(h1[e][14:10]));
      if (acc < 0) begin n_clip++; acc = 0; end
      h2[p] = fp16_convert(real'(acc) * (2.0 ** -SCALE2), stoch, seq2, 4, sat);
      if (stoch && h2[p] != fp16_floor(real'(acc) * (2.0 ** -SCALE2))) n_up++;
      if (stoch) seq2 = (seq2 + 1) % 16;
      any_sat |= sat;
      if (h2[p][14:10] == 0 && h2[p] != 0) n_sub++;
    end
    want_label = 0;
    for (int p = 0; p < NOUT; p++) begin
      y3[p] = longint'(b3[p]) * 1024;
      for (int e = 0; e < H2; e++) y3[p] += longint'(mant(h2[e])) * tval(w3[e][p], int'(h2[e][14:10]));
      if (y3[p] > y3[want_label]) want_label = p;
    end
    if (any_sat) n_sat++;
    if (sgn) n_signed++; else n_unsigned++;
    if (stoch) n_stoch++; else n_trunc++;

    // ---- run the design ----
    in_signed = sgn;
    rnd_mode  = stoch ? RND_STOCH : RND_TRUNC;
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    // each layer stage: planes*K reads + start, bias, read latency and
    // hand-over (4); each conversion pass one per value; DONE 1 cycle; cyc
    // counts from the negedge before the accepting edge (+1)
    want_cyc = (8 * K1 + 4) + (11 * K2 + 4) + (11 * K3 + 4) + H1 + H2 + 1 + 1;
    checks++;
    if (cyc != want_cyc) begin failures++; $display("run length %0d want %0d", cyc, want_cyc); end
    for (int p = 0; p < H1; p++) begin
      checks++;
      if (dut.h1[p] !== h1[p]) begin failures++; $display("h1[%0d] %h want %h", p, dut.h1[p], h1[p]); end
    end
    for (int p = 0; p < H2; p++) begin
      checks++;
      if (dut.h2[p] !== h2[p]) begin failures++; $display("h2[%0d] %h want %h", p, dut.h2[p], h2[p]); end
    end
    for (int p = 0; p < NOUT; p++) begin
      checks++;
      if (longint'(scores[p]) != y3[p]) begin failures++; $display("score[%0d] %0d want %0d", p, scores[p], y3[p]); end
    end
    checks += 2;
    if (int'(label) != want_label) begin failures++; $display("label %0d want %0d", label, want_label); end
    if (sat_seen !== any_sat) begin failures++; $display("sat_seen %0d want %0d", sat_seen, any_sat); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < H1; p++) begin
      for (int q = 0; q < NIN; q++) w1[q][p] = $urandom_range(600) - 300;
      b1[p] = $urandom_range(2000) - 1000;
    end
    for (int p = 0; p < H2; p++) begin
      for (int e = 0; e < H1; e++) w2[e][p] = $urandom_range(254) - 127;
      b2[p] = $urandom_range(200) - 100;
    end
    for (int p = 0; p < NOUT; p++) begin
      for (int e = 0; e < H2; e++) w3[e][p] = $urandom_range(254) - 127;
      b3[p] = $urandom_range(200) - 100;
    end
    load_tables();
    for (int img = 0; img < NIMG; img++) begin
      for (int q = 0; q < NIN; q++) x[q] = NBITS'($urandom);
      classify(img[0], img[0]);
    end
    $display("mechanisms: signed=%0d unsigned=%0d trunc=%0d stoch=%0d round_up=%0d relu_clip=%0d sat=%0d subnormal=%0d",
             n_signed, n_unsigned, n_trunc, n_stoch, n_up, n_clip, n_sat, n_sub);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
