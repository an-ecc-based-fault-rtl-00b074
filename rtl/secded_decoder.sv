// secded_decoder -- the SECDED block inside the SPW unit.
//
// Chains the four stages of the SPW decoder: Computation recomputes the
// check sums and the overall parity P of the read word, Comparison XORs the
// check sums with the stored check bits into the syndrome C, SEC flips the
// data bit at position C, and DED classifies the fault from C and P.
//
// Purely combinational (a read word in, a decoded word out in the same
// cycle). Ports:
//   par        DATA_W-bit parameter as read from memory
//   parity     stored parity word {p, C_CHK_W..C1}
//   sec        parameter after single-error correction
//   ded        1 when a double fault was detected
//   fault_type Table-1 classification (own addition for status reporting)
//
// The structure is the paper's four-stage block diagram; only the
// fault_type status output is this design's addition.
module secded_decoder #(
  parameter int unsigned DATA_W = spw_pkg::PAR_W,
  parameter int unsigned CHK_W  = spw_pkg::chk_bits(DATA_W)
) (
  input  logic [DATA_W-1:0]     par,
  input  logic [CHK_W:0]        parity,
  output logic [DATA_W-1:0]     sec,
  output logic                  ded,
  output spw_pkg::fault_type_e  fault_type
);

  logic [CHK_W-1:0] syndrome;
  logic [CHK_W-1:0] check_sums;
  logic             p;

  spw_computation #(.DATA_W(DATA_W), .CHK_W(CHK_W)) u_computation (
    .par        (par),
    .parity     (parity),
    .check_sums (check_sums),
    .p          (p)
  );

  spw_comparison #(.CHK_W(CHK_W)) u_comparison (
    .check_sums    (check_sums),
    .stored_checks (parity[CHK_W-1:0]),
    .c             (syndrome)
  );

  spw_sec #(.DATA_W(DATA_W), .CHK_W(CHK_W)) u_sec (
    .par (par),
    .c   (syndrome),
    .sec (sec)
  );

  spw_ded #(.CHK_W(CHK_W)) u_ded (
    .c          (syndrome),
    .p          (p),
    .ded        (ded),
    .fault_type (fault_type)
  );

endmodule
