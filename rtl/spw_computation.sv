// spw_computation -- "Computation" stage of the SPW unit.
//
// Recomputes the Hamming check sums C1..C_CHK_W of the parameter Par read
// from memory, using the position rule of spw_pkg: check sum i is the XOR of
// every data bit whose code position has bit i set. It also forms P, the XOR
// of every bit of the stored word (data, stored check bits and the stored
// overall parity p itself), which is 0 for an intact word.
//
// Purely combinational. Ports:
//   par        DATA_W-bit parameter as read from memory
//   parity     stored parity word {p, C_CHK_W..C1}
//   check_sums recomputed C_CHK_W..C1 (to the Comparison stage)
//   p          overall parity check (to the DED stage)
//
// Following the paper: the check-sum rule and "P is the Xor of all bits,
// including P itself, which is a one-bit output obtained from the
// Computation unit". Own choice: the block diagram draws only Par into this
// stage; the stored parity is also fed in here because P needs it.
module spw_computation #(
  parameter int unsigned DATA_W = spw_pkg::PAR_W,
  parameter int unsigned CHK_W  = spw_pkg::chk_bits(DATA_W)
) (
  input  logic [DATA_W-1:0] par,
  input  logic [CHK_W:0]    parity,
  output logic [CHK_W-1:0]  check_sums,
  output logic              p
);

  // One XOR tree per check bit over the data bits it covers; the masks are
  // elaboration-time constants.
  for (genvar i = 0; i < CHK_W; i++) begin : g_chk
    localparam logic [DATA_W-1:0] MASK = DATA_W'(spw_pkg::cover_mask(DATA_W, i));
    assign check_sums[i] = ^(par & MASK);
  end

  assign p = (^par) ^ (^parity);

endmodule
