// spw_ded -- "DED" (double error detection) stage of the SPW unit.
//
// Classifies the read word from the syndrome c and the overall parity check
// p exactly as the fault table of the SPW scheme:
//
//              p == 0         p == 1
//   c == 0     no fault       p is faulty
//   c != 0     double fault   single fault
//
// ded is 1 only for a double fault; it drives the masking selector of
// spw_unit. fault_type gives the full classification for status reporting
// (an own addition; the paper's stage has only the ded output).
//
// Purely combinational.
module spw_ded #(
  parameter int unsigned CHK_W = spw_pkg::CHK_W
) (
  input  logic [CHK_W-1:0]            c,
  input  logic                        p,
  output logic                        ded,
  output spw_pkg::fault_type_e        fault_type
);

  always_comb begin
    unique case ({c != '0, p})
      2'b00:   fault_type = spw_pkg::FT_NONE;
      2'b01:   fault_type = spw_pkg::FT_P_ONLY;
      2'b10:   fault_type = spw_pkg::FT_DOUBLE;
      default: fault_type = spw_pkg::FT_SINGLE;
    endcase
  end

  assign ded = (c != '0) && !p;

endmodule
