// tb_fp16_quant: converts random fixed-point values with two converters,
// one whose binary point (SCALE=8) lets large values saturate and one
// (SCALE=30) whose small values become subnormals, in truncating and in
// stochastic mode, and compares with the binary-search reference. Counts that
// normals, subnormals, saturation and rounding-up all occurred.
module tb_fp16_quant;
  import tablenet_pkg::*;
  import tb_fp16_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int n_sub = 0, n_sat = 0, n_up = 0, n_norm = 0;

  logic rst_n = 0, en = 0;
  rnd_mode_e mode = RND_TRUNC;
  logic [25:0] va = 0;
  logic [19:0] vb = 0;
  fp16_t ha, hb;
  logic sata, satb;

  fp16_quant #(.VW(26), .SCALE(8))  dut_a (.clk, .rst_n, .en, .mode, .v(va), .h(ha), .sat(sata));
  fp16_quant #(.VW(20), .SCALE(30)) dut_b (.clk, .rst_n, .en, .mode, .v(vb), .h(hb), .sat(satb));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int seq = 0;

  task automatic check_one(input logic [15:0] got, input logic gsat, input real v, input bit st);
    logic [15:0] want;
    bit wsat;
    want = fp16_convert(v, st, seq, 4, wsat);
    checks++;
    if (got !== want || gsat !== wsat) begin
      failures++;
      $display("v=%g stoch=%0d got %h/%0d want %h/%0d", v, st, got, gsat, want, wsat);
    end
    if (wsat) n_sat++;
    else if (want[14:10] == 0 && want != 0) n_sub++;
    else if (want != 0) n_norm++;
    if (st && want != fp16_floor(v)) n_up++;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 1200; n++) begin
      int sh;
      mode = (n >= 600) ? RND_STOCH : RND_TRUNC;
      sh = $urandom_range(25);
      va = 26'($urandom) >> sh;
      vb = 20'($urandom) >> $urandom_range(19);
      if (n % 100 == 0) va = '1;
      if (n % 100 == 1) begin va = 0; vb = 0; end
      en = 1;
      #1;
      check_one(ha, sata, real'(va) * (2.0 ** -8),  mode == RND_STOCH);
      check_one(hb, satb, real'(vb) * (2.0 ** -30), mode == RND_STOCH);
      @(negedge clk);
      if (mode == RND_STOCH) seq = (seq + 1) % 16;
    end
    checks++;
    if (n_sub == 0 || n_sat == 0 || n_up == 0 || n_norm == 0) begin
      failures++;
      $display("coverage: sub=%0d sat=%0d up=%0d norm=%0d", n_sub, n_sat, n_up, n_norm);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
