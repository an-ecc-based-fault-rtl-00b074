// secded_encoder -- write-side parity generation for a protected parameter.
//
// When a parameter is stored, its Hamming check bits C1..C_CHK_W and the
// overall parity p are computed and stored beside it. The check bits come
// from the same Computation stage the read side uses (with the parity input
// tied to zero, its P output is the XOR of the data bits); p is then chosen
// so that the whole stored word (data, check bits, p) has even parity.
//
// Purely combinational. Ports:
//   par     DATA_W-bit parameter to be stored
//   parity  {p, C_CHK_W..C1} to be stored with it
//
// The code is the paper's position rule; the parity-word layout is the one
// chosen in spw_pkg.
module secded_encoder #(
  parameter int unsigned DATA_W = spw_pkg::PAR_W,
  parameter int unsigned CHK_W  = spw_pkg::chk_bits(DATA_W)
) (
  input  logic [DATA_W-1:0] par,
  output logic [CHK_W:0]    parity
);

  logic [CHK_W-1:0] checks;
  logic             data_xor;

  spw_computation #(.DATA_W(DATA_W), .CHK_W(CHK_W)) u_computation (
    .par        (par),
    .parity     ('0),
    .check_sums (checks),
    .p          (data_xor)
  );

  assign parity = {data_xor ^ (^checks), checks};

endmodule
