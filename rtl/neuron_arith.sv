// neuron_arith -- arithmetic unit of the fault-tolerant neuron.
//
// Computes y = ReLU(sum_i CPar_i * x_i + b) in signed fixed point, one
// product per clock. Parameters and inputs are DATA_W-bit two's-complement
// numbers with FRAC fractional bits; products keep 2*FRAC fractional bits
// in an ACC_W-bit accumulator, so no precision is lost while summing.
//
// Control (all synchronous, one of them per cycle):
//   clear   acc <= 0
//   mac_en  acc <= acc + par * x
//   bias_en acc <= acc + (par << FRAC)          (par is the bias)
//   finish  y <= ReLU(saturate(acc >>> FRAC)); y_valid pulses next cycle
// The result is truncated toward minus infinity, saturated to DATA_W bits
// and clamped at zero by the ReLU.
//
// The paper gives only the function (16-bit fixed-point parameters, ReLU
// activation); the Q-format, accumulator width, rounding and saturation are
// this design's choices.
module neuron_arith #(
  parameter int unsigned DATA_W = spw_pkg::PAR_W,
  parameter int unsigned FRAC   = 8,
  parameter int unsigned ACC_W  = 48
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     mac_en,
  input  logic                     bias_en,
  input  logic                     finish,
  input  logic signed [DATA_W-1:0] par,
  input  logic signed [DATA_W-1:0] x,
  output logic signed [DATA_W-1:0] y,
  output logic                     y_valid
);

  localparam logic signed [ACC_W-1:0] YMAX = ACC_W'((64'sd1 <<< (DATA_W - 1)) - 1);

  logic signed [ACC_W-1:0] acc;
  logic signed [ACC_W-1:0] prod;
  logic signed [ACC_W-1:0] bias_ext;
  logic signed [ACC_W-1:0] shifted;

  assign prod     = ACC_W'(par) * ACC_W'(x);
  assign bias_ext = ACC_W'(par) <<< FRAC;
  assign shifted  = acc >>> FRAC;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc     <= '0;
      y       <= '0;
      y_valid <= 1'b0;
    end else begin
      y_valid <= finish;
      if (clear)        acc <= '0;
      else if (mac_en)  acc <= acc + prod;
      else if (bias_en) acc <= acc + bias_ext;
      if (finish) begin
        if (shifted <= 0)        y <= '0;
        else if (shifted > YMAX) y <= YMAX[DATA_W-1:0];
        else                     y <= shifted[DATA_W-1:0];
      end
    end
  end

  a_one_op: assert property (@(posedge clk) disable iff (!rst_n)
                             $onehot0({clear, mac_en, bias_en, finish}));

endmodule
