// param_memory -- memory holding the neuron's protected parameters.
//
// Each word is one parameter together with its stored parity bits
// (WIDTH = 16 + 6 bits for the 16-bit parameters of the design). One write
// port, one synchronous read port: rdata shows mem[raddr] one clock after
// raddr is presented. The words are not reset; they must be written before
// they are read.
//
// A third port, flip_en/flip_addr/flip_mask, XORs a mask into one stored
// word. It models soft errors (bit flips in the memory cells, the fault
// model Par_faulty = Par_correct XOR e) so that the protection can be
// exercised; it is a test hook of this design, not part of the scheme. If a
// write and a flip hit the same word in one cycle, the flip is applied to
// the old contents and the write wins.
//
// The paper only says the parameters and their parity bits are stored in
// memory; size, ports and timing here are this design's choices.
module param_memory #(
  parameter int unsigned DEPTH = 577,
  parameter int unsigned WIDTH = 22,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  // write port
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  // read port
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata,
  // soft-error injection port
  input  logic             flip_en,
  input  logic [AW-1:0]    flip_addr,
  input  logic [WIDTH-1:0] flip_mask
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (flip_en) mem[flip_addr] <= mem[flip_addr] ^ flip_mask;
    if (we)      mem[waddr]     <= wdata;
    rdata <= mem[raddr];
  end

  a_waddr: assert property (@(posedge clk) we |-> 32'(waddr) < DEPTH);
  a_faddr: assert property (@(posedge clk) flip_en |-> 32'(flip_addr) < DEPTH);

endmodule
