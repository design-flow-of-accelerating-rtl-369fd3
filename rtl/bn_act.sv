// bn_act: batch normalisation and activation at the end of a computation
// engine.
//
// At inference time BN reduces to y = alpha*x + beta. The weight scaling
// factor E of the binary/ternary weights is folded into alpha, so one 16-bit
// signed scale and one 16-bit signed bias per output channel cover BN and the
// weight scale. The activation is a saturated truncation: the sum is shifted
// right by OUT_RSH (choosing which bits of the wide result form the output)
// and clamped to the output range. With RELU=1 the output is unsigned,
// clamped to [0, 2^OUT_W-1] (all bits carry magnitude, no sign bit is spent);
// with RELU=0 (last layer) it is a signed OUT_W-bit value.
//
// Fixed-point alignment is this design's choice: the bias is shifted left by
// BIAS_LSH before it is added to the product acc*scale, and the rounding is
// plain truncation toward minus infinity (arithmetic shift).
//
// Timing: one register stage; dout/out_valid appear one cycle after in_valid.
module bn_act
  import elb_pkg::*;
#(
  parameter int ACC_W    = 24,
  parameter int OUT_W    = 4,
  parameter bit RELU     = 1'b1,
  parameter int BIAS_LSH = 0,
  parameter int OUT_RSH  = 0
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [ACC_W-1:0] acc,
  input  logic signed [BN_W-1:0]  scale,
  input  logic signed [BN_W-1:0]  bias,
  output logic                    out_valid,
  output logic [OUT_W-1:0]        dout
);

  localparam int PW = ACC_W + BN_W + BIAS_LSH + 2;   // room for product + bias

  logic signed [PW-1:0] prod, sum, shifted;
  logic [OUT_W-1:0]     sat;

  localparam logic signed [PW-1:0] UMAX = PW'((64'd1 << OUT_W) - 1);
  localparam logic signed [PW-1:0] SMAX = PW'((64'd1 << (OUT_W - 1)) - 1);
  localparam logic signed [PW-1:0] SMIN = -SMAX - 1;

  always_comb begin
    prod    = PW'(acc) * PW'(scale);
    sum     = prod + (PW'(bias) <<< BIAS_LSH);
    shifted = sum >>> OUT_RSH;
    if (RELU) begin
      if (shifted < 0)         sat = '0;
      else if (shifted > UMAX) sat = '1;
      else                     sat = shifted[OUT_W-1:0];
    end else begin
      if (shifted < SMIN)      sat = SMIN[OUT_W-1:0];
      else if (shifted > SMAX) sat = SMAX[OUT_W-1:0];
      else                     sat = shifted[OUT_W-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      dout      <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) dout <= sat;
    end
  end

endmodule
