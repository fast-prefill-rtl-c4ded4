// bitplane_mul: LUT-fabric INT8 x INT8 multiplier of the bit-plane systolic
// arrays.
//
// Each operand is split into a signed high nibble and an unsigned low nibble,
// a = aH*16 + aL, and the product is assembled from four 4x4 nibble products:
// a*b = aL*bL + (aH*bL + aL*bH)*16 + aH*bH*256. Every nibble product is in turn
// a sum of bit-plane terms: the AND of one operand with one bit of the other,
// shifted by the bit position. The sign bit of a signed nibble carries weight
// -8, so its term is subtracted. The nibble split and the AND/shift partial
// products follow the paper; the signed treatment of the high nibble is this
// design's choice (the paper writes the decomposition for unsigned bits).
// Purely combinational: the PE registers the product.
module bitplane_mul (
  input  logic signed [7:0]  a,
  input  logic signed [7:0]  b,
  output logic signed [15:0] p
);
  // x (5-bit signed) times nibble y; y_signed selects weight -8 for y[3]
  function automatic logic signed [11:0] nib_mul(input logic signed [4:0] x,
                                                 input logic [3:0] y,
                                                 input logic y_signed);
    logic signed [11:0] acc;
    logic signed [11:0] xe;
    xe  = 12'(x);
    acc = '0;
    for (int j = 0; j < 4; j++) begin
      logic signed [11:0] plane;
      plane = xe & {12{y[j]}};             // bit-plane AND
      if (j == 3 && y_signed) acc = acc - (plane <<< j);
      else                    acc = acc + (plane <<< j);
    end
    return acc;
  endfunction

  logic signed [4:0] aH, aL;
  logic signed [11:0] p_ll, p_hl, p_lh, p_hh;

  always_comb begin
    aH = 5'(a[7:4]);  aH[4] = a[7];          // signed high nibble
    aL = {1'b0, a[3:0]};                     // unsigned low nibble
    p_ll = nib_mul(aL, b[3:0], 1'b0);
    p_hl = nib_mul(aH, b[3:0], 1'b0);
    p_lh = nib_mul(aL, b[7:4], 1'b1);
    p_hh = nib_mul(aH, b[7:4], 1'b1);
    p = 16'(p_ll) + (16'(p_hl) <<< 4) + (16'(p_lh) <<< 4) + (16'(p_hh) <<< 8);
  end
endmodule
