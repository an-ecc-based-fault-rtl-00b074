// tb_spw_unit -- checks the spw_unit block end to end: random 16-bit parameters
// are encoded with the reference model, 0, 1 or 2 distinct stored bits
// (data, check bits or p) are flipped, and the value CPar handed to the arithmetic (zero on a double fault), ded and the fault class
// are compared with the reference decode. Every class of the fault table
// must occur.
module tb_spw_unit;
  import tb_secded_ref_pkg::*;

  logic        clk = 0;
  logic [15:0] par, cpar;
  logic [5:0]  parity;
  logic        ded;
  spw_pkg::fault_type_e fault_type;
  int checks = 0, failures = 0, cycles = 0;
  int seen [4] = '{0, 0, 0, 0};

  spw_unit dut (.par, .parity, .cpar, .ded, .fault_type);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycles++;
    if (cycles > 200000) begin
      failures++;
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  task automatic check_word(logic [15:0] d, logic [21:0] flips);
    logic [21:0] w;
    logic [15:0] exp_cpar, exp_sec;
    logic        exp_ded;
    int          cls;
    w = ref_encode(d) ^ flips;
    par = w[15:0]; parity = w[21:16];
    @(posedge clk);
    ref_decode(w, exp_cpar, cls, exp_sec);
    exp_ded = (cls == 2);
    // independent expectation from the number of flips
    if ($countones(flips) <= 1 && exp_cpar !== d) failures++;
    if ($countones(flips) == 2 && !exp_ded) failures++;
    checks++;
    if (cpar !== exp_cpar || ded !== exp_ded || int'(fault_type) != cls) begin
      failures++;
      if (failures < 10) $display("FAIL d=%h flips=%h cpar=%h ded=%b type=%0d cls=%0d", d, flips, cpar, ded, fault_type, cls);
    end
    seen[cls]++;
  endtask

  initial begin
    for (int b = 0; b < 22; b++) check_word(16'h5A3C, 22'(1) << b);   // every single position
    for (int i = 0; i < 30000; i++) check_word(16'($urandom), rand_flips(int'($urandom_range(2, 0))));
    for (int k = 0; k < 4; k++) begin
      checks++;
      if (seen[k] == 0) begin failures++; $display("FAIL class %0d never seen", k); end
    end
    $display("classes: none=%0d p_only=%0d double=%0d single=%0d", seen[0], seen[1], seen[2], seen[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
