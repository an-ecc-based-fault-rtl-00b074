// ft_neuron -- soft-error-resilient neuron (top of the design).
//
// A neuron whose FAN_IN weights and one bias live in an ECC-protected
// parameter memory. Every parameter is encoded (secded_encoder) when it is
// written; every time it is read for a computation it passes through the
// SPW unit, which corrects a single bit flip, leaves the word alone when
// only the stored overall-parity bit flipped, and forces the parameter to
// zero when it detects a double flip. The arithmetic unit then computes
// y = ReLU(sum_i CPar_i * x_i + CPar_bias) in 16-bit fixed point.
//
// Memory map: weights w_0..w_{FAN_IN-1} at addresses 0..FAN_IN-1, the bias
// at address FAN_IN.
//
// Operation and timing: a start pulse while idle begins one evaluation.
// From the next cycle on, x_ready is high and the neuron takes one input
// x_i per cycle on which x_valid is high (inputs in order i = 0, 1, ...).
// After the last input it adds the bias, then applies ReLU; y_valid pulses
// with the result. With x_valid held high the evaluation takes FAN_IN + 3
// cycles from start to y_valid. spw_valid marks each cycle in which a
// parameter passes the SPW unit into the arithmetic, and spw_fault then
// gives its fault class. Parameters may be (re)written only while idle.
//
// flip_en/flip_addr/flip_mask inject bit flips into a stored word (data bits
// 15:0, check bits C1..C5 at 20:16, overall parity p at 21) to model soft
// errors.
//
// From the paper: one SPW unit per neuron between the parameter storage and
// the arithmetic unit, its correction/masking behaviour and the 16-bit
// parameters. This design's own choices: the sequential one-MAC-per-cycle
// organisation, the memory map, the input handshake, the Q8.8 format and
// the FAN_IN default of 576 (the largest fan-in of the evaluated network,
// its first fully connected layer).
module ft_neuron #(
  parameter int unsigned FAN_IN = 576,
  parameter int unsigned DATA_W = spw_pkg::PAR_W,
  parameter int unsigned FRAC   = 8,
  parameter int unsigned ACC_W  = 48,
  localparam int unsigned CHK_W  = spw_pkg::chk_bits(DATA_W),
  localparam int unsigned CODE_W = DATA_W + CHK_W + 1,
  localparam int unsigned DEPTH  = FAN_IN + 1,
  localparam int unsigned AW     = $clog2(DEPTH)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // parameter load (plain 16-bit values, encoded on the way in)
  input  logic                     par_we,
  input  logic [AW-1:0]            par_waddr,
  input  logic [DATA_W-1:0]        par_wdata,
  // soft-error injection into the stored words
  input  logic                     flip_en,
  input  logic [AW-1:0]            flip_addr,
  input  logic [CODE_W-1:0]        flip_mask,
  // evaluation
  input  logic                     start,
  output logic                     busy,
  input  logic                     x_valid,
  output logic                     x_ready,
  input  logic signed [DATA_W-1:0] x_data,
  output logic signed [DATA_W-1:0] y,
  output logic                     y_valid,
  // protection status
  output logic                     spw_valid,
  output spw_pkg::fault_type_e     spw_fault
);

  typedef enum logic [1:0] {S_IDLE, S_MAC, S_BIAS, S_OUT} state_e;

  state_e            state;
  logic [AW-1:0]     idx;
  logic [AW-1:0]     raddr;
  logic              x_fire;

  logic [CHK_W:0]    wparity;
  logic [CODE_W-1:0] rword;
  logic [DATA_W-1:0] cpar;

  // ---------------------------------------------------------------- storage
  secded_encoder #(.DATA_W(DATA_W), .CHK_W(CHK_W)) u_encoder (
    .par    (par_wdata),
    .parity (wparity)
  );

  param_memory #(.DEPTH(DEPTH), .WIDTH(CODE_W)) u_mem (
    .clk       (clk),
    .we        (par_we),
    .waddr     (par_waddr),
    .wdata     ({wparity, par_wdata}),
    .raddr     (raddr),
    .rdata     (rword),
    .flip_en   (flip_en),
    .flip_addr (flip_addr),
    .flip_mask (flip_mask)
  );

  // ------------------------------------------------------------- protection
  spw_unit #(.DATA_W(DATA_W), .CHK_W(CHK_W)) u_spw (
    .par        (rword[DATA_W-1:0]),
    .parity     (rword[CODE_W-1:DATA_W]),
    .cpar       (cpar),
    .ded        (),                // also encoded in spw_fault
    .fault_type (spw_fault)
  );

  // ------------------------------------------------------------- sequencer
  assign x_ready = (state == S_MAC);
  assign x_fire  = x_ready && x_valid;
  assign busy    = (state != S_IDLE);

  // Read address: the word needed in the next cycle. rword always holds
  // mem[idx] while in S_MAC / S_BIAS.
  always_comb begin
    unique case (state)
      S_IDLE:  raddr = '0;
      S_MAC:   raddr = x_fire ? idx + 1'b1 : idx;
      default: raddr = idx;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      idx   <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_MAC;
          idx   <= '0;
        end
        S_MAC: if (x_fire) begin
          idx <= idx + 1'b1;
          if (32'(idx) == FAN_IN - 1) state <= S_BIAS;
        end
        S_BIAS: state <= S_OUT;
        default: state <= S_IDLE;  // S_OUT
      endcase
    end
  end

  assign spw_valid = x_fire || (state == S_BIAS);

  // ------------------------------------------------------------ arithmetic
  neuron_arith #(.DATA_W(DATA_W), .FRAC(FRAC), .ACC_W(ACC_W)) u_arith (
    .clk     (clk),
    .rst_n   (rst_n),
    .clear   (state == S_IDLE && start),
    .mac_en  (x_fire),
    .bias_en (state == S_BIAS),
    .finish  (state == S_OUT),
    .par     (cpar),
    .x       (x_data),
    .y       (y),
    .y_valid (y_valid)
  );

  a_no_write_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                    par_we |-> state == S_IDLE);

endmodule
