// tb_spw_computation -- checks the Computation stage: the five recomputed
// check sums against the explicit 16-bit coverage table, and P against the
// XOR of all 22 stored bits, for 20000 random words plus corner values.
module tb_spw_computation;
  import tb_secded_ref_pkg::*;

  logic        clk = 0;
  logic [15:0] par;
  logic [5:0]  parity;
  logic [4:0]  check_sums;
  logic        p;
  int checks = 0, failures = 0, cycles = 0;

  spw_computation dut (.par, .parity, .check_sums, .p);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycles++;
    if (cycles > 100000) begin
      failures++;
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  task automatic check_one(logic [15:0] d, logic [5:0] pr);
    par = d; parity = pr;
    @(posedge clk);
    checks++;
    if (check_sums !== ref_checks(d) || p !== ((^d) ^ (^pr))) begin
      failures++;
      if (failures < 10) $display("FAIL d=%h parity=%h cs=%b p=%b", d, pr, check_sums, p);
    end
  endtask

  initial begin
    check_one(16'h0000, 6'h00);
    check_one(16'hFFFF, 6'h3F);
    for (int k = 0; k < 16; k++) check_one(16'(1) << k, 6'h00);  // single data bit
    for (int i = 0; i < 20000; i++) check_one(16'($urandom), 6'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
