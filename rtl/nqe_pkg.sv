// nqe_pkg: types, constants and small helper functions shared by the
// mixed-precision encoder (NQE) modules.
//
// Number formats (all integers, the real scale factors are absorbed by the
// layer-shared bit-shift normalisation that follows every layer):
//   weights     quinary (3 bits)  two's complement -2..+2  = 2 x {-1,-0.5,0,0.5,1}
//               ternary (2 bits)  two's complement -1..+1
//               binary  (1 bit)   1 -> +1, 0 -> -1
//   activations ACT_PIX8  8-bit unsigned pixel 0..255
//               ACT_SIGN  1 bit, 1 -> +1, 0 -> -1        (Sign output)
//               ACT_CODE2 2-bit HWMSB code 0..3          (= 3 x {0,1/3,2/3,1})
//               ACT_HEAV  1 bit, 0 / 1                   (Heaviside output)
// The weight and activation precisions per layer follow the paper's layer
// table; the integer encodings themselves are this design's choice.
package nqe_pkg;

  localparam int unsigned ACC_W = 24;   // accumulator width
  localparam int unsigned REF_W = 4;    // stored bit-shift (BSN) scale width
  localparam int unsigned BIAS_W = 16;  // first-layer channel bias width
  localparam int unsigned PIX_W = 8;    // input pixel precision
  localparam int unsigned IMG = 32;     // patch side (pixels)
  localparam int unsigned NCLS = 10;    // classifier outputs

  typedef enum logic [1:0] {
    ACT_PIX8  = 2'd0,
    ACT_SIGN  = 2'd1,
    ACT_CODE2 = 2'd2,
    ACT_HEAV  = 2'd3
  } act_kind_e;

  typedef enum logic [1:0] {
    OUT_SIGN  = 2'd0,
    OUT_HWMSB = 2'd1,
    OUT_HEAV  = 2'd2
  } out_kind_e;

  // configuration targets on the top-level load bus
  typedef enum logic [3:0] {
    SEL_W1   = 4'd0,   // conv layer 1 weights (quinary)
    SEL_W2   = 4'd1,   // conv layer 2 weights (quinary)
    SEL_W3   = 4'd2,   // conv layer 3 weights (ternary)
    SEL_W4   = 4'd3,   // conv layer 4 weights (ternary)
    SEL_W5   = 4'd4,   // conv layer 5 weights (binary)
    SEL_W6   = 4'd5,   // group conv weights (binary)
    SEL_DW   = 4'd6,   // depthwise 4x4 weights (binary)
    SEL_FC   = 4'd7,   // bottleneck FC weights (binary)
    SEL_CLS  = 4'd8,   // classifier weights (binary)
    SEL_BIAS = 4'd9,   // conv layer 1 channel biases
    SEL_REF  = 4'd10   // BSN shifts (reference positions) of layers 2 and 4
  } cfg_sel_e;

  function automatic int unsigned abits(act_kind_e k);
    case (k)
      ACT_PIX8:  return PIX_W;
      ACT_CODE2: return 2;
      default:   return 1;
    endcase
  endfunction

  function automatic int unsigned obits(out_kind_e k);
    return (k == OUT_HWMSB) ? 2 : 1;
  endfunction

  // signed value of an activation code
  function automatic logic signed [9:0] act_val(act_kind_e k, logic [7:0] a);
    case (k)
      ACT_PIX8:  return $signed({2'b00, a});
      ACT_SIGN:  return a[0] ? 10'sd1 : -10'sd1;
      ACT_CODE2: return $signed({8'd0, a[1:0]});
      default:   return $signed({9'd0, a[0]});
    endcase
  endfunction

endpackage
