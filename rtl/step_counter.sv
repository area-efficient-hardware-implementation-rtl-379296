// step_counter -- the clock counter (clk_cntr) of the iterative multiplier.
//
// One multiplication takes STEPS clocks, one partial product per clock.
// clk_cntr tells the selection block which operand segments to feed to the
// partial multiplier and the accumulation block which update to apply.
// The counter itself is only named (as clk_cntr) in the block diagram of the
// source paper; the start/busy/done handshake below is this design's own.
//
// Timing: when start is high in an idle cycle, that same cycle is clock 0
// (clk_cntr = 0, en = 1), so the first partial product is taken at the
// edge ending that cycle. The following cycles are clocks 1 .. STEPS-1.
// After the edge that ends clock STEPS-1, done is high for one cycle and the
// product is complete: STEPS clock edges from the start edge to the result.
// start while busy is ignored; start in the done cycle begins a new product.
module step_counter #(
  parameter int unsigned STEPS  = 3,
  parameter int unsigned STEP_W = (STEPS > 1) ? $clog2(STEPS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              en,        // a partial product is taken this cycle
  output logic [STEP_W-1:0] clk_cntr,  // index of that partial product
  output logic              busy,
  output logic              done       // one-cycle pulse: product complete
);
  logic [STEP_W-1:0] cnt;

  always_comb begin
    en       = busy | start;
    clk_cntr = busy ? cnt : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (en) begin
        if (clk_cntr == STEP_W'(STEPS - 1)) begin
          busy <= 1'b0;
          cnt  <= '0;
          done <= 1'b1;
        end else begin
          busy <= 1'b1;
          cnt  <= clk_cntr + 1'b1;
        end
      end
    end
  end

  // clk_cntr never leaves 0 .. STEPS-1
  a_cntr_range : assert property (@(posedge clk) disable iff (!rst_n)
    clk_cntr < STEP_W'(STEPS));
endmodule
