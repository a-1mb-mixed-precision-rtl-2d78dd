// hwmsb: Half-Wave Most-Significant-Bit activation with the layer's
// bit-shift normalisation (BSN) folded into it.
//
// A positive accumulator value is reduced to the position of its leading
// one. As in the paper, the reference position ref_pos is the bit that the
// lowest non-zero code is assigned to: the accumulator bit whose weight stands
// for 0.125 (third bit right of the point) after normalisation. The BSN
// power-of-two scale is therefore just a different ref_pos. Mapping (the
// paper's 2-bit HWMSB table):
//   leading one at bit >= ref_pos+2   -> 3   (x >= 0.5)
//   leading one at bit ref_pos+1      -> 2   (0.25 <= x < 0.5)
//   leading one at bit ref_pos        -> 1   (0.125 <= x < 0.25)
//   lower, zero or negative           -> 0   (half-wave: negatives cut)
// The mapping is the paper's; the leading-one detector and the 4-bit integer
// reference position are this design's. Purely combinational.
module hwmsb #(
  parameter int unsigned ACC_W = 24,
  parameter int unsigned REF_W = 4
) (
  input  logic signed [ACC_W-1:0] acc,
  input  logic [REF_W-1:0]        ref_pos,
  output logic [1:0]              code
);
  localparam int unsigned PW = $clog2(ACC_W) + 1;

  logic [PW-1:0] msb;     // index of the leading one
  logic          nonzero;

  always_comb begin
    msb = '0;
    nonzero = 1'b0;
    for (int i = 0; i < ACC_W - 1; i++) begin
      if (acc[i]) begin
        msb = PW'(i);
        nonzero = 1'b1;
      end
    end
  end

  // distance of the leading one above ref_pos-1 (codes are 1..3 for distance 1..3)
  logic signed [PW+1:0] ldist;
  assign ldist = $signed({2'b00, msb}) - $signed({{(PW+2-REF_W){1'b0}}, ref_pos}) + 1;

  always_comb begin
    if (acc[ACC_W-1] || !nonzero || ldist <= 0) code = 2'd0;
    else if (ldist >= 3)                        code = 2'd3;
    else                                       code = ldist[1:0];
  end
endmodule
