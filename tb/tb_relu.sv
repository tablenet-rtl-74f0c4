// tb_relu: random signed lanes against max(a, 0).
module tb_relu;
  localparam int W = 9, N = 4;
  int checks = 0, failures = 0;
  logic signed [W-1:0] a [N];
  logic        [W-1:0] y [N];
  int neg_seen = 0;

  relu #(.W(W), .N(N)) dut (.a, .y);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 500; n++) begin
      for (int i = 0; i < N; i++) a[i] = W'($urandom);
      if (n == 0) begin a[0] = '0; a[1] = {1'b1, {(W-1){1'b0}}}; a[2] = {1'b0, {(W-1){1'b1}}}; a[3] = '1; end
      #1;
      for (int i = 0; i < N; i++) begin
        int av, want;
        av = int'(a[i]);
        want = (av > 0) ? av : 0;
        if (av < 0) neg_seen++;
        checks++;
        if (int'(y[i]) != want) begin
          failures++;
          $display("lane %0d: a=%0d y=%0d", i, av, y[i]);
        end
      end
    end
    checks++;
    if (neg_seen == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
