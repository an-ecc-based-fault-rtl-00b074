// spw_pkg -- shared constants, types and code-layout functions of the SPW
// (SECDED-plus-word-masking) parameter protection.
//
// A PAR_W-bit parameter is protected by an extended Hamming code. Code
// positions are numbered from 1; every power-of-two position holds a Hamming
// check bit C1, C2, C3, ... and the remaining positions hold the data bits in
// order (data bit 0 at position 3, bit 1 at 5, bit 2 at 6, ...). Check bit Ci
// covers every position whose binary index has bit i-1 set. One more bit, p,
// is the even parity of the whole Hamming word. For PAR_W = 16 this gives
// C1..C5 at positions 1, 2, 4, 8, 16, data at 3, 5-7, 9-15, 17-21 and p as a
// 22nd bit: the layout of the 16-bit example the design is built around.
//
// Stored parity word layout (this design's choice): parity[CHK_W-1:0] holds
// C1..C_CHK_W (bit i = C(i+1)), parity[CHK_W] holds p.
//
// The functions below are evaluated at elaboration time only (constant
// arguments); they turn the position rule into constants for the modules.
package spw_pkg;

  // Parameter width used throughout the design (16-bit fixed point).
  localparam int unsigned PAR_W = 16;

  // Number of Hamming check bits r for a given data width: smallest r with
  // 2^r >= dw + r + 1.
  function automatic int unsigned chk_bits(int unsigned dw);
    int unsigned r;
    r = 1;
    while ((1 << r) < (dw + r + 1)) r++;
    return r;
  endfunction

  // Code position (1-based) of data bit k (0-based) for data width dw.
  function automatic int unsigned data_pos(int unsigned dw, int unsigned k);
    int unsigned pos;
    int unsigned seen;
    pos  = 0;
    seen = 0;
    for (int unsigned q = 1; q < 2 * (dw + 8); q++) begin
      if ((q & (q - 1)) != 0) begin  // not a power of two: a data position
        if (seen == k) begin
          pos = q;
          break;
        end
        seen++;
      end
    end
    return pos;
  endfunction

  // Largest data width the mask function below supports.
  localparam int unsigned MAX_W = 256;

  // Data bits covered by check bit i (bit k set when data bit k's code
  // position has bit i set), for data width dw.
  function automatic logic [MAX_W-1:0] cover_mask(int unsigned dw, int unsigned i);
    logic [MAX_W-1:0] m;
    m = '0;
    for (int unsigned k = 0; k < dw; k++)
      m[k] = ((data_pos(dw, k) >> i) & 1) != 0;
    return m;
  endfunction

  localparam int unsigned CHK_W = chk_bits(PAR_W);  // 5 for 16-bit data

  // Fault classification of Table 1 (C = syndrome, P = overall parity check).
  typedef enum logic [1:0] {
    FT_NONE   = 2'd0,  // C == 0, P == 0 : no fault
    FT_P_ONLY = 2'd1,  // C == 0, P == 1 : the stored p bit itself is faulty
    FT_DOUBLE = 2'd2,  // C != 0, P == 0 : double fault, parameter masked
    FT_SINGLE = 2'd3   // C != 0, P == 1 : single fault, corrected
  } fault_type_e;

endpackage
