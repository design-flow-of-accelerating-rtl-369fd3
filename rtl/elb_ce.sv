// elb_ce: computation engine (CE) for one output channel.
//
// A CE takes P input activations in parallel (P input channels of one kernel
// position), passes each through a weight operator (elb_op: select Din, ~Din
// or 0 for binary/ternary weights, multiply for 8-bit weights), sums the P
// results in an adder tree and adds the sum into an accumulator. CONV, BN and
// activation are fused: when the last kernel step of an output pixel has been
// accumulated, the accumulator goes through bn_act (alpha*x + beta, then
// saturated truncation) to give the output activation.
//
// Interface: in_valid marks one step (P activations + P weights). in_first
// restarts the accumulation, in_last ends it; scale and bias are captured
// with the last step, so the caller may change them afterwards.
// Timing: the accumulator is updated in the cycle of the step; out_valid
// follows two cycles after the step marked in_last.
//
// The paper gives the structure and the 16-24 bit accumulator range;
// ACC_W = 24 takes the top of that range. Overflow of the accumulator is not
// detected: its width is to be chosen large enough for the layer.
module elb_ce
  import elb_pkg::*;
#(
  parameter int     P        = 4,
  parameter int     IN_W     = 4,
  parameter wmode_t WMODE    = WM_TER,
  parameter int     WB       = wbits(WMODE),
  parameter int     ACC_W    = 24,
  parameter int     OUT_W    = 4,
  parameter bit     RELU     = 1'b1,
  parameter int     BIAS_LSH = 0,
  parameter int     OUT_RSH  = 0
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic                   in_first,
  input  logic                   in_last,
  input  logic [P-1:0][IN_W-1:0] din,
  input  logic [P-1:0][WB-1:0]   w,
  input  logic signed [BN_W-1:0] scale,
  input  logic signed [BN_W-1:0] bias,
  output logic                   out_valid,
  output logic [OUT_W-1:0]       dout
);

  localparam int OP_W = (WMODE == WM_FIX8) ? IN_W + 8 : IN_W + 1;

  logic signed [OP_W-1:0]  op_out [P];
  logic signed [ACC_W-1:0] tree_sum;
  logic signed [ACC_W-1:0] acc;
  logic                    done;
  logic signed [BN_W-1:0]  scale_q, bias_q;

  for (genvar i = 0; i < P; i++) begin : g_op
    elb_op #(.IN_W(IN_W), .WMODE(WMODE), .WB(WB), .OUT_W(OP_W)) u_op (
      .din (din[i]),
      .w   (w[i]),
      .dout(op_out[i])
    );
  end

  // Adder tree over the P operator outputs.
  always_comb begin
    tree_sum = '0;
    for (int i = 0; i < P; i++) tree_sum += ACC_W'(op_out[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc     <= '0;
      done    <= 1'b0;
      scale_q <= '0;
      bias_q  <= '0;
    end else begin
      done <= in_valid && in_last;
      if (in_valid) acc <= (in_first ? '0 : acc) + tree_sum;
      if (in_valid && in_last) begin
        scale_q <= scale;
        bias_q  <= bias;
      end
    end
  end

  bn_act #(
    .ACC_W(ACC_W), .OUT_W(OUT_W), .RELU(RELU),
    .BIAS_LSH(BIAS_LSH), .OUT_RSH(OUT_RSH)
  ) u_bn_act (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (done),
    .acc      (acc),
    .scale    (scale_q),
    .bias     (bias_q),
    .out_valid(out_valid),
    .dout     (dout)
  );

endmodule
