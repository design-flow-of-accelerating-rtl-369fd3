// elb_op: one weight operator of the computation engine (CE).
//
// For binary and ternary weights there is no multiplier: a multiplexer picks
// the activation (weight +1), its bitwise inverse ~Din (weight -1) or zero
// (ternary weight 0), exactly as the operator table of the CE gives it. The
// activation is unsigned, so it is zero-extended by one bit before the
// inversion; ~Din then equals -Din-1 in two's complement. This one's-complement
// offset is the same for every pixel of an output channel (it is one LSB per
// -1 weight), so it is meant to be folded into that channel's BN bias offline.
//
// For 8-bit fixed-point weights (first and last layer) the operator is a real
// signed multiplier; this mode is this design's way of serving the 8-bit
// layers with the same CE structure.
//
// Interface: din (unsigned IN_W bits), w (WB bits, encoding in elb_pkg),
// dout (signed OUT_W bits). Purely combinational.
module elb_op
  import elb_pkg::*;
#(
  parameter int     IN_W  = 4,
  parameter wmode_t WMODE = WM_TER,
  parameter int     WB    = wbits(WMODE),
  parameter int     OUT_W = (WMODE == WM_FIX8) ? IN_W + 8 : IN_W + 1
) (
  input  logic [IN_W-1:0]         din,
  input  logic [WB-1:0]           w,
  output logic signed [OUT_W-1:0] dout
);

  logic signed [OUT_W-1:0] din_x;   // zero-extended activation
  assign din_x = OUT_W'(din);

  if (WMODE == WM_BIN) begin : g_bin
    always_comb dout = w[0] ? ~din_x : din_x;
  end else if (WMODE == WM_TER) begin : g_ter
    always_comb begin
      case (w[1:0])
        TER_POS: dout = din_x;
        TER_NEG: dout = ~din_x;
        default: dout = '0;
      endcase
    end
  end else begin : g_fix8
    logic signed [7:0] ws;
    assign ws   = w[7:0];
    always_comb dout = OUT_W'(din_x * OUT_W'(ws));
  end

endmodule
