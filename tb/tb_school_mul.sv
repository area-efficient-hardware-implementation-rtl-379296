// tb_school_mul -- exhaustive check of the 8x8 classical multiplier against
// a shift-and-XOR reference (all 65536 operand pairs).
module tb_school_mul;
  import tb_ref_pkg::*;
  logic [7:0]  a, b;
  logic [14:0] p;
  int checks = 0, failures = 0;

  school_mul dut (.a, .b, .p);

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    prod_t r;
    for (int i = 0; i < 256; i++)
      for (int j = 0; j < 256; j++) begin
        a = 8'(i); b = 8'(j);
        #1;
        r = clmul(op_t'(a), op_t'(b));
        checks++;
        if (p !== r[14:0] || r[1023:15] != '0) begin
          failures++;
          if (failures < 5) $display("mismatch a=%h b=%h p=%h exp=%h", a, b, p, r[14:0]);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
