// smm: sign-magnitude 1b x 8b multiplier of the BitWave compute engine.
//
// Multiplies a two's complement activation by one magnitude bit of a
// sign-magnitude weight. The weight's sign comes separately, from the sign
// column held by the zero-column index parser. When the weight bit is 0 the
// product is 0; when it is 1 the product is the activation, negated (invert
// and add one) when the weight is negative. Following the paper, the sign of
// the product is the XOR of activation and weight signs; this is implicit in
// the two's complement result. The paper's drawing keeps a 7-bit magnitude
// A'[6:0], which cannot hold |-128|; here the product is a 9-bit two's
// complement value so every 8-bit activation is exact (own choice).
// Purely combinational.
module smm #(
  parameter int unsigned ACT_W = 8
) (
  input  logic signed [ACT_W-1:0] act,     // activation, two's complement
  input  logic                    w_bit,   // weight magnitude bit of this column
  input  logic                    w_sign,  // weight sign (1 = negative)
  output logic signed [ACT_W:0]   prod     // 0, +act or -act
);
  logic signed [ACT_W:0] a_ext;
  logic signed [ACT_W:0] a_neg;

  always_comb begin
    a_ext = {act[ACT_W-1], act};
    a_neg = ~a_ext + (ACT_W+1)'(1);
    prod  = w_bit ? (w_sign ? a_neg : a_ext) : '0;
  end
endmodule
