// spw_sec -- "SEC" (single error correction) stage of the SPW unit.
//
// Flips the data bit whose code position equals the syndrome c. A syndrome
// that points at a check-bit position (1, 2, 4, 8, ...) or past the last
// code position leaves the data unchanged, since no data bit sits there.
// The stage looks only at c, as in the block diagram; on a double fault its
// output is wrong, which is harmless because the word-masking selector in
// spw_unit then replaces it by zero.
//
// Purely combinational. Ports:
//   par  DATA_W-bit parameter as read from memory
//   c    syndrome from spw_comparison
//   sec  corrected parameter
module spw_sec #(
  parameter int unsigned DATA_W = spw_pkg::PAR_W,
  parameter int unsigned CHK_W  = spw_pkg::chk_bits(DATA_W)
) (
  input  logic [DATA_W-1:0] par,
  input  logic [CHK_W-1:0]  c,
  output logic [DATA_W-1:0] sec
);

  // Each data bit compares the syndrome with its own (constant) position.
  for (genvar k = 0; k < DATA_W; k++) begin : g_bit
    localparam int unsigned POS = spw_pkg::data_pos(DATA_W, k);
    assign sec[k] = par[k] ^ (c == CHK_W'(POS));
  end

endmodule
