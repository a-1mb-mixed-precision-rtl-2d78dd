// qdot: multiplier-free mixed-precision dot product.
//
// Computes sum_i w[i] * a[i] over N lanes, where the weights are quinary
// (WBITS=3, -2..+2), ternary (WBITS=2, -1..+1) or binary (WBITS=1, 1 -> +1,
// 0 -> -1) and the activations are of kind AKIND (see nqe_pkg). Each lane
// product is formed with a select, an optional one-bit left shift (weight
// magnitude 2) and an optional negation, as the paper notes for 0/+-0.5/+-1
// kernels; the lane products then go through an adder tree. en=0 forces the
// result to zero (used for taps in the zero padding).
// Purely combinational; the caller registers the result.
module qdot
  import nqe_pkg::*;
#(
  parameter int unsigned N     = 64,
  parameter int unsigned WBITS = 3,
  parameter act_kind_e   AKIND = ACT_SIGN,
  parameter int unsigned SUM_W = ACC_W,
  localparam int unsigned AB   = abits(AKIND)
) (
  input  logic [N*AB-1:0]         act,
  input  logic [N*WBITS-1:0]      wgt,
  input  logic                    en,
  output logic signed [SUM_W-1:0] sum
);
  logic signed [11:0] prod [N];

  always_comb begin
    for (int i = 0; i < N; i++) begin
      logic [7:0]         a_raw;
      logic signed [11:0] a;
      logic [WBITS-1:0]   w;
      logic               neg;
      logic               mag2;
      logic               zero;
      a_raw = 8'(act[i*AB +: AB]);
      a     = 12'(act_val(AKIND, a_raw));
      w     = wgt[i*WBITS +: WBITS];
      if (WBITS == 1) begin
        neg = ~w[0]; mag2 = 1'b0; zero = 1'b0;
      end else begin
        neg  = w[WBITS-1];
        zero = (w == '0);
        // magnitude 2 only exists for quinary weights (+2 = 010, -2 = 110);
        // unused codes (011, 100, 101 and ternary 10) are not produced by training
        mag2 = (WBITS == 3) && !w[0] && !zero;
      end
      if (zero)      prod[i] = '0;
      else begin
        prod[i] = mag2 ? (a <<< 1) : a;
        if (neg) prod[i] = -prod[i];
      end
    end
  end

  always_comb begin
    logic signed [SUM_W-1:0] s;
    s = '0;
    for (int i = 0; i < N; i++) s += SUM_W'(prod[i]);
    sum = en ? s : '0;
  end
endmodule
