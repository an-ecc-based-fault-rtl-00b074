// tb_spw_comparison -- checks the Comparison stage: the syndrome must be the
// bitwise XOR of recomputed and stored check bits, exhaustively over all
// 32 x 32 pairs.
module tb_spw_comparison;
  logic       clk = 0;
  logic [4:0] check_sums, stored_checks, c;
  int checks = 0, failures = 0, cycles = 0;

  spw_comparison dut (.check_sums, .stored_checks, .c);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycles++;
    if (cycles > 10000) begin
      failures++;
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin
    for (int a = 0; a < 32; a++)
      for (int b = 0; b < 32; b++) begin
        logic [4:0] exp_c;
        check_sums = 5'(a); stored_checks = 5'(b);
        @(posedge clk);
        for (int i = 0; i < 5; i++) exp_c[i] = (((a >> i) & 1) != ((b >> i) & 1));
        checks++;
        if (c !== exp_c) begin
          failures++;
          if (failures < 10) $display("FAIL a=%0d b=%0d c=%b", a, b, c);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
