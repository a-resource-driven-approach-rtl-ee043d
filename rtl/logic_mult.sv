// logic_mult -- signed multiplier built from LUT logic only (shift-and-add).
//
// Used by the logic-only convolution IP, which must not occupy a DSP slice.
// The product is formed as the sum of the partial products a*2^i for every set
// bit i of b, with the weight of b's sign bit negated (two's complement), so the
// description contains no '*' operator that a synthesis tool would map to a DSP.
// Purely combinational: p = a * b, exact, A_W + B_W bits wide.
module logic_mult #(
  parameter int unsigned A_W = 8,
  parameter int unsigned B_W = 8
) (
  input  logic signed [A_W-1:0]     a,
  input  logic signed [B_W-1:0]     b,
  output logic signed [A_W+B_W-1:0] p
);

  localparam int unsigned P_W = A_W + B_W;

  always_comb begin
    logic signed [P_W-1:0] a_ext;
    logic signed [P_W-1:0] sum;
    a_ext = P_W'(a);                    // sign-extended multiplicand
    sum   = '0;
    for (int i = 0; i < int'(B_W); i++) begin
      if (b[i]) begin
        if (i == int'(B_W) - 1) sum = sum - (a_ext <<< i);   // sign bit weighs -2^(B_W-1)
        else                    sum = sum + (a_ext <<< i);
      end
    end
    p = sum;
  end

endmodule
