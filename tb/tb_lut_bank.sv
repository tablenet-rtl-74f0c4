// tb_lut_bank: writes random rows into a small lut_bank, reads them back in
// random order and checks the one-cycle read latency and that rd_data holds
// while rd_en is low.
module tb_lut_bank;
  localparam int DEPTH = 50, WIDTH = 40;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic             wr_en = 0, rd_en = 0;
  logic [5:0]       wr_addr = 0, rd_addr = 0;
  logic [WIDTH-1:0] wr_data = 0, rd_data;
  logic [WIDTH-1:0] model [DEPTH];

  lut_bank #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      wr_en = 1; wr_addr = 6'(a); wr_data = {$urandom, $urandom};
      model[a] = wr_data;
      @(negedge clk);
    end
    wr_en = 0;
    for (int n = 0; n < 200; n++) begin
      int a;
      logic [WIDTH-1:0] held;
      a = $urandom_range(DEPTH - 1);
      rd_en = 1; rd_addr = 6'(a);
      @(negedge clk);
      checks++;
      if (rd_data !== model[a]) begin
        failures++;
        $display("read %0d: got %h want %h", a, rd_data, model[a]);
      end
      // hold check: no read for a cycle, data must stay
      held = rd_data;
      rd_en = 0; rd_addr = 6'($urandom_range(DEPTH - 1));
      @(negedge clk);
      checks++;
      if (rd_data !== held) failures++;
      // overwrite a row now and then
      if (n % 7 == 0) begin
        wr_en = 1; wr_addr = 6'(a); wr_data = ~model[a]; model[a] = wr_data;
        @(negedge clk);
        wr_en = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
