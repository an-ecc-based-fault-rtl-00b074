// tb_spw_sec -- checks the SEC stage: for every syndrome value 0..31 and
// random data, exactly the data bit at that code position (per the explicit
// position table) is flipped, and nothing is changed for check-bit or
// out-of-range positions.
module tb_spw_sec;
  import tb_secded_ref_pkg::*;

  logic        clk = 0;
  logic [15:0] par, sec;
  logic [4:0]  c;
  int checks = 0, failures = 0, cycles = 0;

  spw_sec dut (.par, .c, .sec);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycles++;
    if (cycles > 100000) begin
      failures++;
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin
    for (int rep = 0; rep < 200; rep++)
      for (int s = 0; s < 32; s++) begin
        logic [15:0] exp_sec;
        par = 16'($urandom); c = 5'(s);
        @(posedge clk);
        exp_sec = par;
        for (int k = 0; k < 16; k++) if (DPOS[k] == s) exp_sec[k] = ~par[k];
        checks++;
        if (sec !== exp_sec) begin
          failures++;
          if (failures < 10) $display("FAIL par=%h c=%0d sec=%h exp=%h", par, s, sec, exp_sec);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
