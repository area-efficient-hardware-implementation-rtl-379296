// ik_multiplier -- iterative Karatsuba polynomial multiplier for GF(2^233)
// (NIST curve B-233): C(x) = A(x) * B(x) without reduction, 233 x 233 bits
// in, 465 bits out.
//
// Karatsuba's formula is applied to the operands log2(SEGMENTS) times, but
// the resulting 3^log2(SEGMENTS) partial products are not computed by as
// many multipliers in parallel: a single SEG_BITS x SEG_BITS partial
// multiplier computes one of them per clock, and the product is collected
// segment by segment. Three blocks, as in the source paper's block diagram:
//   op_select    -- picks segment XORs of A and B for the current clock
//   karatsuba_pm -- the one-clock partial multiplier (input 1 x input 2)
//   prod_accum   -- accumulates pr[0] / pr[1] into the result segments
// plus step_counter, which produces clk_cntr for both of them.
//
// Default configuration (the paper's main one): SEGMENTS = 2, operands
// padded with leading zeros to 256 bits, a 128-bit partial multiplier
// (Karatsuba down to 8-bit classical multipliers), 3 clocks per product.
// SEGMENTS = 4 (64-bit partial multiplier, 9 clocks, using the paper's exact
// accumulation sequence) and SEGMENTS = 8 (32-bit, 27 clocks) are the other
// configurations the paper measures.
//
// Interface and timing: pulse start for one cycle with a, b valid; keep a
// and b stable until done (the operands are not registered, as in the block
// diagram). done pulses for one cycle 3^log2(SEGMENTS) clock edges (3 by
// default) after the edge that sampled start; c is then valid and holds
// until the next start. busy is high in between, and start is ignored
// while busy. Reset: asynchronous, active low. The handshake, the operand
// hold rule and the reset are this design's choices; the source paper
// describes only the datapath and the clock-by-clock schedule.
module ik_multiplier
  import ik_pkg::*;
#(
  parameter int unsigned OP_BITS   = 233,
  parameter int unsigned SEGMENTS  = 2,
  parameter int unsigned SEG_BITS  = 2 ** $clog2((OP_BITS + SEGMENTS - 1) / SEGMENTS),
  parameter int unsigned LEAF_BITS = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [OP_BITS-1:0] a,
  input  logic [OP_BITS-1:0] b,
  output logic               busy,
  output logic               done,
  output logic [2*OP_BITS-2:0] c
);
  localparam int unsigned STEPS  = num_steps(SEGMENTS);
  localparam int unsigned STEP_W = $clog2(STEPS);
  localparam int unsigned PAD    = SEGMENTS * SEG_BITS;

  logic [PAD-1:0]        a_pad, b_pad;
  logic                  en;
  logic [STEP_W-1:0]     clk_cntr;
  logic [SEG_BITS-1:0]   in1, in2;
  logic [2*SEG_BITS-2:0] product;
  logic [2*PAD-1:0]      c_full;

  always_comb begin
    a_pad = PAD'(a);
    b_pad = PAD'(b);
  end

  step_counter #(.STEPS(STEPS), .STEP_W(STEP_W)) u_cntr (
    .clk, .rst_n, .start, .en, .clk_cntr, .busy, .done
  );

  op_select #(.SEGMENTS(SEGMENTS), .SEG_BITS(SEG_BITS), .STEP_W(STEP_W)) u_sel (
    .a(a_pad), .b(b_pad), .clk_cntr, .in1, .in2
  );

  karatsuba_pm #(.N(SEG_BITS), .LEAF(LEAF_BITS)) u_pm (
    .a(in1), .b(in2), .p(product)
  );

  prod_accum #(.SEGMENTS(SEGMENTS), .SEG_BITS(SEG_BITS), .STEP_W(STEP_W)) u_acc (
    .clk, .rst_n, .en, .clk_cntr, .pr(product), .c(c_full)
  );

  // Bits above 2*OP_BITS-2 of the padded product are always zero.
  assign c = c_full[2*OP_BITS-2:0];

  initial begin
    assert (PAD >= OP_BITS) else $error("SEGMENTS*SEG_BITS must cover OP_BITS");
  end
  // operands must not change while a product is being formed
  a_stable : assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> ($stable(a) && $stable(b)));
endmodule
