// elb_pkg: types and constants shared by the hybrid extremely-low-bit-width
// (ELB) neural network accelerator.
//
// Each layer of the network has its own weight precision (the "hybrid"
// scheme): 8-bit fixed point for the first and last layer, ternary or binary
// for the layers in between. wmode_t names these precisions; the weight bit
// width that goes with each mode is given by wbits().
//
// Weight encodings are a choice of this design (the paper gives the value
// table but not the bit patterns):
//   binary  : 1 bit,  0 -> +1, 1 -> -1
//   ternary : 2 bits, 2'b01 -> +1, 2'b11 -> -1, 2'b00 / 2'b10 -> 0
//   fixed8  : 8-bit two's complement integer
package elb_pkg;

  typedef enum logic [1:0] {
    WM_BIN  = 2'd0,
    WM_TER  = 2'd1,
    WM_FIX8 = 2'd2
  } wmode_t;

  // Weight field width in bits for each precision.
  function automatic int wbits(wmode_t m);
    case (m)
      WM_BIN:  return 1;
      WM_TER:  return 2;
      default: return 8;
    endcase
  endfunction

  // BN scale and bias widths (16 bits each).
  localparam int BN_W = 16;

  // Ternary codes.
  localparam logic [1:0] TER_POS = 2'b01;
  localparam logic [1:0] TER_NEG = 2'b11;

endpackage
