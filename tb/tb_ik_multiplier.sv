// tb_ik_multiplier -- end-to-end test of the B-233 polynomial multiplier at
// its default configuration (two segments, 128-bit partial multiplier).
// Random and corner-case 233-bit operands are multiplied and the 465-bit
// result compared with a shift-and-XOR reference; done must come exactly 3
// clock edges after the edge that sampled start. The run also makes each
// mechanism of the design happen and counts it:
//   products     completed multiplications
//   mid_steps    clocks with the Karatsuba middle product (a0^a1)*(b0^b1)
//   top_bit      products whose bit 464 is set (both operands of degree 232)
//   ignored      start pulses while busy, which must not disturb the product
//   back2back    starts in the done cycle of the previous product
module tb_ik_multiplier;
  import tb_ref_pkg::*;
  localparam int OPB = 233;
  localparam int LAT = 3;

  int checks = 0, failures = 0;
  int products = 0, mid_steps = 0, top_bit = 0, ignored = 0, back2back = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             start, busy, done;
  logic [OPB-1:0]   a, b;
  logic [2*OPB-2:0] c;

  ik_multiplier dut (.clk, .rst_n, .start, .a, .b, .busy, .done, .c);

  always @(posedge clk) if (dut.en && dut.clk_cntr == 2) mid_steps++;

  task automatic check(string name, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 6) $display("mismatch %s at %0t", name, $time);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one product; start is raised at the current negedge-aligned time
  // if glitch != 0, start is pulsed again while busy
  task automatic multiply(op_t x, op_t y, logic glitch, logic restart_after);
    prod_t exp;
    int    n;
    a = x[OPB-1:0]; b = y[OPB-1:0]; start = 1;
    exp = clmul(op_t'(a), op_t'(b));
    @(negedge clk); start = 0; n = 1;
    while (!done && n < 100) begin
      if (glitch && n == 1) begin start = 1; ignored++; end
      @(negedge clk); start = 0; n++;
    end
    check("latency", n == LAT + 0);
    check("product", prod_t'(c) == exp);
    if (c[2*OPB-2]) top_bit++;
    products++;
    if (restart_after) back2back++;
    else begin
      @(negedge clk);
      check("result held", prod_t'(c) == exp && !busy);
    end
  endtask

  initial begin
    op_t ones;
    ones = (op_t'(1) << OPB) - 1;
    start = 0; a = '0; b = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check("idle after reset", !busy && !done);
    multiply(ones, ones, 0, 0);
    multiply(op_t'(1) << (OPB - 1), op_t'(1) << (OPB - 1), 0, 0);
    multiply('0, ones, 0, 0);
    multiply(op_t'(1), rand_bits(OPB), 0, 0);
    multiply(op_t'(1) << 128, op_t'(1) << 127, 0, 0);
    for (int t = 0; t < 300; t++)
      multiply(rand_bits(OPB), rand_bits(OPB), (t % 7) == 3, (t % 5) == 1);
    @(negedge clk);
    check("mechanism: products",  products  > 0);
    check("mechanism: mid_steps", mid_steps > 0 && mid_steps == products);
    check("mechanism: top_bit",   top_bit   > 0);
    check("mechanism: ignored",   ignored   > 0);
    check("mechanism: back2back", back2back > 0);
    $display("products=%0d mid_steps=%0d top_bit=%0d ignored=%0d back2back=%0d",
             products, mid_steps, top_bit, ignored, back2back);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
