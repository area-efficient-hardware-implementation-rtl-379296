// tb_ik_configs -- the other two iterative Karatsuba configurations that the
// multiplier supports for B-233 operands: four segments (64-bit partial
// multiplier, 9 clocks, chained accumulation sequence) and eight segments
// (32-bit partial multiplier, 27 clocks). Random and corner-case 233-bit
// operands, checked against a shift-and-XOR reference, with the number of
// clocks per product checked too.
module tb_ik_configs;
  import tb_ref_pkg::*;
  localparam int OPB = 233;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             start4, busy4, done4, start8, busy8, done8;
  logic [OPB-1:0]   a, b;
  logic [2*OPB-2:0] c4, c8;

  ik_multiplier #(.SEGMENTS(4)) dut4 (.clk, .rst_n, .start(start4), .a, .b, .busy(busy4), .done(done4), .c(c4));
  ik_multiplier #(.SEGMENTS(8)) dut8 (.clk, .rst_n, .start(start8), .a, .b, .busy(busy8), .done(done8), .c(c8));

  task automatic check(string name, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 6) $display("mismatch %s at %0t", name, $time);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic multiply(op_t x, op_t y);
    prod_t exp;
    int    n4, n8;
    a = x[OPB-1:0]; b = y[OPB-1:0];
    exp = clmul(op_t'(a), op_t'(b));
    start4 = 1; start8 = 1;
    n4 = 0; n8 = 0;
    @(negedge clk); start4 = 0; start8 = 0;
    for (int n = 1; n < 40; n++) begin
      if (done4) n4 = n;
      if (done8) n8 = n;
      @(negedge clk);
    end
    check("clocks, 4 segments", n4 == 9);
    check("clocks, 8 segments", n8 == 27);
    check("product, 4 segments", prod_t'(c4) == exp);
    check("product, 8 segments", prod_t'(c8) == exp);
  endtask

  initial begin
    op_t ones;
    ones = (op_t'(1) << OPB) - 1;
    start4 = 0; start8 = 0; a = '0; b = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    multiply(ones, ones);
    multiply(op_t'(1) << (OPB - 1), ones);
    for (int t = 0; t < 100; t++) multiply(rand_bits(OPB), rand_bits(OPB));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
