// tb_stoch_round: checks each rounding decision against the rule
// "keep floor(x) if r(i) <= 1 + (floor(x)-x)/eps" evaluated in real
// arithmetic, that the index advances only on en and wraps after R, and that
// over one full period of R accesses the rounded values sum to exactly R*x.
module tb_stoch_round;
  import tb_fp16_pkg::*;
  localparam int W = 6, D = 4, R = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n = 0, en = 0;
  logic [W+D-1:0] x = 0;
  logic [W:0] y;
  logic [3:0] idx;

  stoch_round #(.W(W), .D(D), .R(R)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int i_model = 0;

  task automatic access(input logic [W+D-1:0] xv, output int got);
    real xr, fl;
    int want;
    x = xv; en = 1;
    #1;
    xr = real'(xv) / real'(2 ** D);
    fl = $floor(xr);
    want = (sr_r(i_model, D) <= 1.0 + (fl - xr)) ? int'(fl) : int'(fl) + 1;
    got = int'(y);
    checks++;
    if (got != want) begin
      failures++;
      $display("x=%0d i=%0d y=%0d want %0d", xv, i_model, got, want);
    end
    @(negedge clk);
    i_model = (i_model + 1) % R;
  endtask

  initial begin
    int got, sum;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (idx != 0) failures++;
    for (int n = 0; n < 60; n++) begin
      logic [W+D-1:0] xv;
      xv = (W+D)'($urandom);
      if (n < 3) xv = '1 >> 1;
      sum = 0;
      for (int k = 0; k < R; k++) begin
        access(xv, got);
        sum += got;
      end
      // mean of the rounded values equals x exactly over a period
      checks++;
      if (sum * (2 ** D) != R * int'(xv)) begin
        failures++;
        $display("x=%0d period sum %0d", xv, sum);
      end
      // en low: index must not move
      en = 0;
      @(negedge clk);
      checks++;
      if (int'(idx) != i_model) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
