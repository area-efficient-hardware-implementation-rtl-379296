// tb_karatsuba_pm -- checks the recursive Karatsuba partial multiplier at
// the sizes of the three iterative Karatsuba configurations (128, 64, 32
// bits) and at an odd size (13 bits, which exercises the zero-padded high
// half), with random and corner-case operands against a shift-and-XOR
// reference.
module tb_karatsuba_pm;
  import tb_ref_pkg::*;
  logic [127:0] a128, b128; logic [254:0] p128;
  logic [63:0]  a64,  b64;  logic [126:0] p64;
  logic [31:0]  a32,  b32;  logic [62:0]  p32;
  logic [12:0]  a13,  b13;  logic [24:0]  p13;
  int checks = 0, failures = 0;

  karatsuba_pm                     dut128 (.a(a128), .b(b128), .p(p128));
  karatsuba_pm #(.N(64))           dut64  (.a(a64),  .b(b64),  .p(p64));
  karatsuba_pm #(.N(32))           dut32  (.a(a32),  .b(b32),  .p(p32));
  karatsuba_pm #(.N(13), .LEAF(4)) dut13  (.a(a13),  .b(b13),  .p(p13));

  task automatic check(string name, prod_t got, prod_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 5) $display("mismatch %s got=%h exp=%h", name, got, exp);
    end
  endtask

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    op_t x, y;
    for (int t = 0; t < 400; t++) begin
      case (t)
        0:       begin x = '0;              y = rand_bits(128); end
        1:       begin x = ~op_t'(0);       y = ~op_t'(0); end
        2:       begin x = op_t'(1) << 127; y = op_t'(1) << 127; end
        3:       begin x = op_t'(1);        y = rand_bits(128); end
        default: begin x = rand_bits(128);  y = rand_bits(128); end
      endcase
      a128 = x[127:0]; b128 = y[127:0];
      a64  = x[63:0];  b64  = y[63:0];
      a32  = x[31:0];  b32  = y[31:0];
      a13  = x[12:0];  b13  = y[12:0];
      #1;
      check("128", prod_t'(p128), clmul(op_t'(a128), op_t'(b128)));
      check("64",  prod_t'(p64),  clmul(op_t'(a64),  op_t'(b64)));
      check("32",  prod_t'(p32),  clmul(op_t'(a32),  op_t'(b32)));
      check("13",  prod_t'(p13),  clmul(op_t'(a13),  op_t'(b13)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
