// tb_spw_ded -- checks the DED stage exhaustively against the fault table:
// C = 0 / P = 0 no fault, C = 0 / P = 1 p faulty, C != 0 / P = 0 double
// fault (ded = 1), C != 0 / P = 1 single fault.
module tb_spw_ded;
  logic       clk = 0;
  logic [4:0] c;
  logic       p, ded;
  spw_pkg::fault_type_e fault_type;
  int checks = 0, failures = 0, cycles = 0;

  spw_ded dut (.c, .p, .ded, .fault_type);

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
    for (int s = 0; s < 32; s++)
      for (int pp = 0; pp < 2; pp++) begin
        logic exp_ded;
        int   exp_cls;
        c = 5'(s); p = 1'(pp);
        @(posedge clk);
        if (s == 0) exp_cls = (pp == 1) ? 1 : 0;
        else        exp_cls = (pp == 1) ? 3 : 2;
        exp_ded = (exp_cls == 2);
        checks++;
        if (ded !== exp_ded || int'(fault_type) != exp_cls) begin
          failures++;
          $display("FAIL c=%0d p=%0d ded=%b type=%0d", s, pp, ded, fault_type);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
