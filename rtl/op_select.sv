// op_select -- the selection block: feeds the partial multiplier.
//
// A and B arrive cut into SEGMENTS segments of SEG_BITS bits. In clock
// clk_cntr the block outputs, on input 1 and input 2, the XOR of the same
// subset of segments of A and of B, e.g. for four segments
//   clock 0..3 : a0, a1, a2, a3
//   clock 4..8 : a0^a1, a0^a2, a1^a3, a2^a3, a0^a1^a2^a3
// (and likewise for B), the order of the source paper's operation table for
// four segments. For two segments the order is a0, a1, a0^a1. The subset of
// every clock is a constant table built at elaboration by ik_pkg (see there
// for the order used with eight segments, which is this design's
// generalisation). The block is combinational; A and B must stay stable
// while a multiplication runs.
module op_select
  import ik_pkg::*;
#(
  parameter int unsigned SEGMENTS = 2,
  parameter int unsigned SEG_BITS = 128,
  parameter int unsigned STEP_W   = $clog2(num_steps(SEGMENTS))
) (
  input  logic [SEGMENTS*SEG_BITS-1:0] a,
  input  logic [SEGMENTS*SEG_BITS-1:0] b,
  input  logic [STEP_W-1:0]            clk_cntr,
  output logic [SEG_BITS-1:0]          in1,
  output logic [SEG_BITS-1:0]          in2
);
  localparam seg_table_t SUBSETS = subset_table(SEGMENTS);

  seg_mask_t m;

  always_comb begin
    m   = SUBSETS[clk_cntr];
    in1 = '0;
    in2 = '0;
    for (int unsigned i = 0; i < SEGMENTS; i++) begin
      if (m[i]) begin
        in1 = in1 ^ a[i*SEG_BITS +: SEG_BITS];
        in2 = in2 ^ b[i*SEG_BITS +: SEG_BITS];
      end
    end
  end

  initial begin
    assert (SEGMENTS >= 2 && SEGMENTS <= MAX_SEGS && (SEGMENTS & (SEGMENTS - 1)) == 0)
      else $error("SEGMENTS must be a power of two from 2 to %0d", MAX_SEGS);
  end
endmodule
