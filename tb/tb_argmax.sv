// tb_argmax: random scores, with forced ties, against a reference scan that
// keeps the first maximum.
module tb_argmax;
  localparam int P = 10, W = 12;
  int checks = 0, failures = 0;
  logic signed [W-1:0] a [P];
  logic [3:0] idx;
  logic signed [W-1:0] max;

  argmax #(.P(P), .W(W)) dut (.a, .idx, .max);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 400; n++) begin
      int best, bi;
      for (int i = 0; i < P; i++) a[i] = W'($urandom);
      if (n % 4 == 1) a[$urandom_range(P-1)] = a[$urandom_range(P-1)];  // tie
      if (n % 4 == 2) for (int i = 0; i < P; i++) a[i] = -W'(i + 1);       // first wins
      #1;
      best = int'(a[0]); bi = 0;
      for (int i = 0; i < P; i++) if (int'(a[i]) > best) begin best = int'(a[i]); bi = i; end
      // a tie with the maximum must resolve to the lowest index
      for (int i = 0; i < P; i++) if (int'(a[i]) == best) begin bi = i; break; end
      checks += 2;
      if (int'(idx) != bi) begin failures++; $display("idx %0d want %0d", idx, bi); end
      if (int'(max) != best) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
