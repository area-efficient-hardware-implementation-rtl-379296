// karatsuba_pm -- the partial multiplier: one-clock (combinational) N x N
// bit polynomial multiplier over GF(2) built by applying Karatsuba's formula
// recursively.
//
// An operand of N bits is split into a low half of H = ceil(N/2) bits and a
// high half (zero-padded to H bits), and
//   A*B = L + (L + Hi + M) x^H + Hi x^(2H),
//   L = a_lo*b_lo,  Hi = a_hi*b_hi,  M = (a_lo+a_hi)*(b_lo+b_hi),
// where + is XOR. The three half-size products are again instances of this
// module, until N <= LEAF, where a classical multiplier (school_mul) is used.
// With N = 128 and LEAF = 8 this is the 128 -> 64 -> 32 -> 16 -> 8 structure
// that the name k128_k64_k32_k16_sh8 of the partial multiplier of the
// two-segment design describes (81 8x8 classical multipliers). The exact
// gate netlist behind that name is not published; this is a straightforward
// rendering of the name.
//
// Lint note: when this module is linted on its own as the top, Verilator
// reports p_lo/p_hi/p_md as undriven, because its lint pass does not follow
// the self-instantiation. The recursion does elaborate: simulation matches
// a shift-and-XOR reference at every size tested, and synthesis produces the
// expected 81 classical 8x8 multipliers for N = 128. The warning therefore
// stands.
//
// Interface: a, b (N bits) -> p (2N-1 bits), combinational; in the
// multiplier its output is sampled by the accumulation registers on the
// next clock edge, which makes it a "one-clock" partial multiplier.
module karatsuba_pm #(
  parameter int unsigned N    = 128,
  parameter int unsigned LEAF = 8
) (
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  output logic [2*N-2:0] p
);
  if (N <= LEAF) begin : g_leaf
    school_mul #(.N(N)) u_school (.a(a), .b(b), .p(p));
  end else begin : g_split
    localparam int unsigned H = (N + 1) / 2;   // low half width
    localparam int unsigned R = N - H;         // high half width (R <= H)

    logic [H-1:0]   a_lo, a_hi, b_lo, b_hi, a_md, b_md;
    logic [2*H-2:0] p_lo, p_hi, p_md;
    logic [4*H-2:0] full;

    always_comb begin
      a_lo = a[H-1:0];
      b_lo = b[H-1:0];
      a_hi = '0;
      b_hi = '0;
      a_hi[R-1:0] = a[N-1:H];
      b_hi[R-1:0] = b[N-1:H];
      a_md = a_lo ^ a_hi;
      b_md = b_lo ^ b_hi;
    end

    karatsuba_pm #(.N(H), .LEAF(LEAF)) u_lo (.a(a_lo), .b(b_lo), .p(p_lo));
    karatsuba_pm #(.N(H), .LEAF(LEAF)) u_hi (.a(a_hi), .b(b_hi), .p(p_hi));
    karatsuba_pm #(.N(H), .LEAF(LEAF)) u_md (.a(a_md), .b(b_md), .p(p_md));

    always_comb begin
      full = '0;
      full[2*H-2:0]   = full[2*H-2:0]   ^ p_lo;
      full[3*H-2:H]   = full[3*H-2:H]   ^ p_lo ^ p_hi ^ p_md;
      full[4*H-2:2*H] = full[4*H-2:2*H] ^ p_hi;
      p = full[2*N-2:0];   // the bits above 2N-2 are zero by construction
    end
  end
endmodule
