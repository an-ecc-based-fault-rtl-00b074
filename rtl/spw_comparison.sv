// spw_comparison -- "Comparison" stage of the SPW unit.
//
// Forms the syndrome C = Par_parameter XOR parity, where Par_parameter =
// C1 C2 ... Cl are the check sums recomputed by spw_computation and parity
// holds the check bits stored with the parameter. A non-zero C is the code
// position of a single flipped bit (or the signature of a double fault).
//
// Purely combinational. Ports:
//   check_sums    recomputed C_CHK_W..C1
//   stored_checks stored C_CHK_W..C1 (parity word without p)
//   c             syndrome, to the SEC and DED stages
//
// The XOR itself is the paper's formula; nothing here is an own choice.
module spw_comparison #(
  parameter int unsigned CHK_W = spw_pkg::CHK_W
) (
  input  logic [CHK_W-1:0] check_sums,
  input  logic [CHK_W-1:0] stored_checks,
  output logic [CHK_W-1:0] c
);

  assign c = check_sums ^ stored_checks;

endmodule
