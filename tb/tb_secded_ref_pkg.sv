// tb_secded_ref_pkg -- reference model of the 16-bit SECDED code used by the
// testbenches, written independently of the RTL.
//
// Instead of the position rule, it uses the explicit coverage table of the
// 16-bit code: which data bits (1..16) each check bit C1..C5 covers, and at
// which code position each data bit sits. Stored word layout (22 bits):
// [15:0] data, [20:16] C1..C5, [21] overall parity p.
package tb_secded_ref_pkg;

  localparam int DW = 16;
  localparam int CW = 22;

  // Data bits covered by C1..C5 (bit k = data bit k+1).
  localparam logic [15:0] CMASK [5] = '{16'hAD5B, 16'h366D, 16'hC78E, 16'h07F0, 16'hF800};

  // Code position of data bits 1..16 (index 0 = data bit 1).
  localparam int DPOS [16] = '{3, 5, 6, 7, 9, 10, 11, 12, 13, 14, 15, 17, 18, 19, 20, 21};

  function automatic logic [4:0] ref_checks(logic [15:0] d);
    logic [4:0] c;
    for (int i = 0; i < 5; i++) c[i] = ^(d & CMASK[i]);
    return c;
  endfunction

  function automatic logic [21:0] ref_encode(logic [15:0] d);
    logic [4:0] c;
    c = ref_checks(d);
    return {(^d) ^ (^c), c, d};
  endfunction

  // Reference decode of a stored word: expected corrected/masked value and
  // Table-1 class (0 none, 1 p only, 2 double, 3 single).
  function automatic void ref_decode(input logic [21:0] w, output logic [15:0] cpar,
                                     output int cls, output logic [15:0] sec);
    logic [4:0]  syn;
    logic        pchk;
    syn  = ref_checks(w[15:0]) ^ w[20:16];
    pchk = ^w;
    sec  = w[15:0];
    for (int k = 0; k < 16; k++) if (int'(syn) == DPOS[k]) sec[k] = ~sec[k];
    if (syn == 0) cls = pchk ? 1 : 0;
    else          cls = pchk ? 3 : 2;
    cpar = (cls == 2) ? 16'h0 : sec;
  endfunction

  // Random mask of exactly n distinct set bits among the 22 stored bits.
  function automatic logic [21:0] rand_flips(int n);
    logic [21:0] m;
    int b;
    m = '0;
    while ($countones(m) < n) begin
      b = int'($urandom_range(CW - 1, 0));
      m[b] = 1'b1;
    end
    return m;
  endfunction

endpackage
