// tb_secded_encoder -- checks parity generation exhaustively: for all 65536
// 16-bit values the stored parity word {p, C5..C1} must match the explicit
// coverage table, and the full 22-bit stored word must have even parity.
module tb_secded_encoder;
  import tb_secded_ref_pkg::*;

  logic        clk = 0;
  logic [15:0] par;
  logic [5:0]  parity;
  int checks = 0, failures = 0, cycles = 0;

  secded_encoder dut (.par, .parity);

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
    for (int v = 0; v < 65536; v++) begin
      logic [21:0] exp_w;
      par = 16'(v);
      @(posedge clk);
      exp_w = ref_encode(par);
      checks++;
      if (parity !== exp_w[21:16] || (^{parity, par}) !== 1'b0) begin
        failures++;
        if (failures < 10) $display("FAIL d=%h parity=%b exp=%b", par, parity, exp_w[21:16]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
