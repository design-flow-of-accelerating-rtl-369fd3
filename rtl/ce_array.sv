// ce_array: an array of N computation engines working in parallel.
//
// All CEs see the same P-channel input vector from the reshape buffer; each
// gets its own P weights from the weight word and so computes its own output
// channel. One weight word therefore carries N*P weights; CE n uses bits
// [(n*P+p)*WB +: WB] for input lane p. The array turns one step into N
// accumulations, and after the last step of an output pixel presents N output
// activations at once (out_valid two cycles after the last step).
//
// The paper shows the CE array fed by one reshape buffer and one weight
// buffer; the weight packing order above is this design's choice.
module ce_array
  import elb_pkg::*;
#(
  parameter int     N        = 4,
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
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic                     in_first,
  input  logic                     in_last,
  input  logic [P-1:0][IN_W-1:0]   din,
  input  logic [N*P*WB-1:0]        wword,
  input  logic [N-1:0][BN_W-1:0]   scale,
  input  logic [N-1:0][BN_W-1:0]   bias,
  output logic                     out_valid,
  output logic [N-1:0][OUT_W-1:0]  dout
);

  logic [N-1:0] ce_valid;

  for (genvar n = 0; n < N; n++) begin : g_ce
    elb_ce #(
      .P(P), .IN_W(IN_W), .WMODE(WMODE), .WB(WB), .ACC_W(ACC_W),
      .OUT_W(OUT_W), .RELU(RELU), .BIAS_LSH(BIAS_LSH), .OUT_RSH(OUT_RSH)
    ) u_ce (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (in_valid),
      .in_first (in_first),
      .in_last  (in_last),
      .din      (din),
      .w        (wword[n*P*WB +: P*WB]),
      .scale    (scale[n]),
      .bias     (bias[n]),
      .out_valid(ce_valid[n]),
      .dout     (dout[n])
    );
  end

  // All CEs run in lock step, so their valids rise together.
  assign out_valid = &ce_valid;

endmodule
