// school_mul -- classical (schoolbook) multiplier of two polynomials over
// GF(2), purely combinational.
//
// c_i = XOR over k+l=i of a_k AND b_l (the textbook formula: N*N AND gates
// and (N-1)^2 XOR gates). It is the leaf of the partial multiplier: the
// partial multiplier of the 2-segment design is named k128_k64_k32_k16_sh8,
// which this design reads as Karatsuba splits from 128 down to 16 bits with
// 8-bit classical multipliers at the bottom. The leaf size N = 8 comes from
// that name; the gate structure is the plain formula.
//
// Interface: a, b are N-bit polynomials (bit i = coefficient of x^i);
// p is their (2N-1)-bit product. No clock; result valid after gate delay.
module school_mul #(
  parameter int unsigned N = 8
) (
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  output logic [2*N-2:0] p
);
  always_comb begin
    p = '0;
    for (int unsigned k = 0; k < N; k++)
      for (int unsigned l = 0; l < N; l++)
        p[k+l] = p[k+l] ^ (a[k] & b[l]);
  end
endmodule
