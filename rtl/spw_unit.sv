// spw_unit -- the SPW parameter-protection unit placed in front of a neuron.
//
// Takes a parameter Par and its stored parity bits, decodes them with the
// SECDED block, and feeds the neuron's arithmetic with CPar:
//   * no fault, or only the stored p bit faulty : CPar = Par
//   * single fault                              : CPar = Par with the bit corrected
//   * double fault (ded = 1)                    : CPar = 0 (word masking)
// The masking is a 2:1 selector with inputs sec and constant 0, selected by
// ded, as in the unit's block diagram; which input ded selects follows the
// text ("resets it to zero if two errors occur").
//
// Purely combinational. fault_type is an own status output.
module spw_unit #(
  parameter int unsigned DATA_W = spw_pkg::PAR_W,
  parameter int unsigned CHK_W  = spw_pkg::chk_bits(DATA_W)
) (
  input  logic [DATA_W-1:0]     par,
  input  logic [CHK_W:0]        parity,
  output logic [DATA_W-1:0]     cpar,
  output logic                  ded,
  output spw_pkg::fault_type_e  fault_type
);

  logic [DATA_W-1:0] sec;

  secded_decoder #(.DATA_W(DATA_W), .CHK_W(CHK_W)) u_secded (
    .par        (par),
    .parity     (parity),
    .sec        (sec),
    .ded        (ded),
    .fault_type (fault_type)
  );

  // Word-masking selector: S1 = sec, S2 = 0, select = ded.
  assign cpar = ded ? '0 : sec;

endmodule
