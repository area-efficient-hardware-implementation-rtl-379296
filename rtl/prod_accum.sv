// prod_accum -- the product accumulation block: collects one (2n-1)-bit
// partial product per clock into the 2*SEGMENTS result segments
// c^0 .. c^(2*SEGMENTS-1), each SEG_BITS (= n) bits wide.
//
// A partial product pr is seen as two halves, pr[0] = bits n-1..0 and
// pr[1] = bits 2n-2..n (n-1 bits, a zero put on top). Two update schemes:
//
//  * SEGMENTS == 4: the exact nine-clock operation sequence of the source
//    paper's hardware (its Table 2). Besides XORing in pr[0]/pr[1], it reuses
//    segments already formed (e.g. c^1 = c^1 ^ c^0 ^ pr[0] in clock 2, and
//    c^6 = c^3 ^ c^2, c^5 = c^3 ^ c^1 in clock 5), which needs 29 n-bit XORs
//    in all instead of 42. All updates of one clock act on the old segment
//    values (non-blocking), and clock 1 (clk_cntr = 0) overwrites c^0, c^1,
//    so no clearing cycle is needed.
//
//  * any other SEGMENTS (the two-segment default among them): each partial
//    product is XORed into every segment position where it appears in the
//    fully expanded Karatsuba formula, as in the step-by-step example of the
//    source paper (Step 1: c^0 = pr[0]; c^1..c^3 = pr[0]^pr[1]; c^4 = pr[1];
//    ...). The positions come from a constant table (ik_pkg::offset_table).
//    Clock 0 loads instead of XORing, again without a clearing cycle. The
//    paper gives a chained sequence only for four segments; this one is the
//    plain form of the same calculation.
//
// Interface: en marks a cycle in which pr belongs to partial product
// clk_cntr; the segments update on that cycle's rising edge. c is valid after
// the edge of the last clock (clk_cntr = STEPS-1). Asynchronous active-low
// reset clears c (a choice of this design).
module prod_accum
  import ik_pkg::*;
#(
  parameter int unsigned SEGMENTS = 2,
  parameter int unsigned SEG_BITS = 128,
  parameter int unsigned STEP_W   = $clog2(num_steps(SEGMENTS))
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           en,
  input  logic [STEP_W-1:0]              clk_cntr,
  input  logic [2*SEG_BITS-2:0]          pr,
  output logic [2*SEGMENTS*SEG_BITS-1:0] c
);
  localparam int unsigned NSEG = 2 * SEGMENTS;
  typedef logic [SEG_BITS-1:0] seg_t;

  seg_t [NSEG-1:0] cs, cs_next;
  seg_t            pr0, pr1;

  always_comb begin
    pr0 = pr[SEG_BITS-1:0];
    pr1 = seg_t'(pr[2*SEG_BITS-2:SEG_BITS]);
  end

  if (SEGMENTS == 4) begin : g_table2
    // Operation sequence for four segments, clocks 1..9 = clk_cntr 0..8.
    always_comb begin
      cs_next = cs;
      case (clk_cntr)
        STEP_W'(0): begin                       // pr = a0*b0
          cs_next[0] = pr0;
          cs_next[1] = pr1;
        end
        STEP_W'(1): begin                       // pr = a1*b1
          cs_next[1] = cs[1] ^ cs[0] ^ pr0;
          cs_next[2] = pr1;
        end
        STEP_W'(2): begin                       // pr = a2*b2
          cs_next[2] = cs[2] ^ cs[1] ^ pr0;
          cs_next[3] = pr1;
        end
        STEP_W'(3): begin                       // pr = a3*b3
          cs_next[3] = cs[3] ^ cs[2] ^ pr0 ^ pr1;
          cs_next[7] = pr1;
        end
        STEP_W'(4): begin                       // pr = (a0^a1)*(b0^b1)
          cs_next[6] = cs[3] ^ cs[2];
          cs_next[5] = cs[3] ^ cs[1];
          cs_next[4] = cs[3] ^ cs[0] ^ pr1;
          cs_next[3] = cs[3] ^ cs[7] ^ pr0;
          cs_next[2] = cs[2] ^ pr1;
          cs_next[1] = cs[1] ^ pr0;
        end
        STEP_W'(5): begin                       // pr = (a0^a2)*(b0^b2)
          cs_next[3] = cs[3] ^ pr0 ^ pr1;
          cs_next[2] = cs[2] ^ pr0;
          cs_next[4] = cs[4] ^ pr1;
        end
        STEP_W'(6): begin                       // pr = (a1^a3)*(b1^b3)
          cs_next[4] = cs[4] ^ pr0 ^ pr1;
          cs_next[3] = cs[3] ^ pr0;
          cs_next[5] = cs[5] ^ pr1;
        end
        STEP_W'(7): begin                       // pr = (a2^a3)*(b2^b3)
          cs_next[3] = cs[3] ^ pr0;
          cs_next[5] = cs[5] ^ pr0;
          cs_next[4] = cs[4] ^ pr1;
          cs_next[6] = cs[6] ^ pr1;
        end
        STEP_W'(8): begin                       // pr = (a0^..^a3)*(b0^..^b3)
          cs_next[3] = cs[3] ^ pr0;
          cs_next[4] = cs[4] ^ pr1;
        end
        default: ;
      endcase
    end
  end else begin : g_expanded
    localparam off_table_t OFFSETS = offset_table(SEGMENTS);
    off_mask_t om;
    always_comb begin
      om = OFFSETS[clk_cntr];
      cs_next = (clk_cntr == '0) ? '0 : cs;
      for (int unsigned k = 0; k + 1 < NSEG; k++) begin
        if (om[k]) begin
          cs_next[k]   = cs_next[k]   ^ pr0;
          cs_next[k+1] = cs_next[k+1] ^ pr1;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  cs <= '0;
    else if (en) cs <= cs_next;
  end

  assign c = cs;
endmodule
