// tb_neuron_arith -- checks the arithmetic unit against an integer model:
// random dot products of random length with a bias, then ReLU with
// saturation, in Q8.8. Also checks that y_valid follows finish by one
// cycle, and that the negative (ReLU clamp), positive and saturated output
// cases all occur.
module tb_neuron_arith;
  localparam int DW = 16, FRAC = 8;

  logic clk = 0, rst_n = 0;
  logic clear = 0, mac_en = 0, bias_en = 0, finish = 0;
  logic signed [DW-1:0] par = '0, x = '0, y;
  logic y_valid;
  int checks = 0, failures = 0, cycles = 0;
  int n_neg = 0, n_pos = 0, n_sat = 0;

  neuron_arith dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycles++;
    if (cycles > 200000) begin
      failures++;
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  task automatic run_one(int n, int scale);
    longint acc, r, exp_y;
    @(negedge clk) clear = 1;
    acc = 0;
    for (int i = 0; i < n; i++) begin
      @(negedge clk) clear = 0; mac_en = 1;
      par = DW'($signed($urandom_range(2 * scale, 0)) - scale);
      x   = DW'($signed($urandom_range(2 * scale, 0)) - scale);
      acc += longint'(par) * longint'(x);
    end
    @(negedge clk) clear = 0; mac_en = 0; bias_en = 1;
    par = DW'($signed($urandom_range(2 * scale, 0)) - scale);
    acc += longint'(par) * 256;
    @(negedge clk) bias_en = 0; finish = 1;
    @(negedge clk) finish = 0;
    checks++;
    if (y_valid !== 1'b1) begin failures++; $display("FAIL y_valid not one cycle after finish"); end
    r = acc >>> FRAC;
    if (r <= 0)          begin exp_y = 0;     n_neg++; end
    else if (r > 32767)  begin exp_y = 32767; n_sat++; end
    else                 begin exp_y = r;     n_pos++; end
    checks++;
    if (longint'(y) != exp_y) begin
      failures++;
      if (failures < 10) $display("FAIL n=%0d acc=%0d y=%0d exp=%0d", n, acc, y, exp_y);
    end
    @(negedge clk);
    checks++;
    if (y_valid !== 1'b0) begin failures++; $display("FAIL y_valid longer than one cycle"); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) run_one(int'($urandom_range(40, 1)), 2048);
    for (int t = 0; t < 50; t++) run_one(int'($urandom_range(40, 1)), 32767);
    checks++;
    if (n_neg == 0 || n_pos == 0 || n_sat == 0) begin
      failures++;
      $display("FAIL output case missing neg=%0d pos=%0d sat=%0d", n_neg, n_pos, n_sat);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
