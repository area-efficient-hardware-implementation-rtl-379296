// tb_op_select -- checks the selection block. For two segments (default
// size, 128-bit segments) and four segments the expected order of operand
// subsets is written out by hand from the multiplication schedule
// (a0, a1, a0^a1 and a0, a1, a2, a3, a0^a1, a0^a2, a1^a3, a2^a3,
// a0^a1^a2^a3). For eight segments the 27 subsets are checked to be the 27
// distinct Karatsuba subsets (every set of the form S2 x S1 x S0 on the
// index bits, S_l one of {0}, {1}, {0,1}) with non-decreasing size.
module tb_op_select;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;

  logic [255:0] a2, b2;  logic [1:0] k2; logic [127:0] i2a, i2b;
  logic [63:0]  a4, b4;  logic [3:0] k4; logic [15:0]  i4a, i4b;
  logic [63:0]  a8, b8;  logic [4:0] k8; logic [7:0]   i8a, i8b;

  op_select                                   dut2 (.a(a2), .b(b2), .clk_cntr(k2), .in1(i2a), .in2(i2b));
  op_select #(.SEGMENTS(4), .SEG_BITS(16))    dut4 (.a(a4), .b(b4), .clk_cntr(k4), .in1(i4a), .in2(i4b));
  op_select #(.SEGMENTS(8), .SEG_BITS(8))     dut8 (.a(a8), .b(b8), .clk_cntr(k8), .in1(i8a), .in2(i8b));

  task automatic check(string name, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 8) $display("mismatch %s", name);
    end
  endtask

  function automatic logic [127:0] xs2(logic [255:0] v, logic [1:0] m);
    xs2 = '0;
    for (int i = 0; i < 2; i++) if (m[i]) xs2 ^= v[i*128 +: 128];
  endfunction
  function automatic logic [15:0] xs4(logic [63:0] v, logic [3:0] m);
    xs4 = '0;
    for (int i = 0; i < 4; i++) if (m[i]) xs4 ^= v[i*16 +: 16];
  endfunction

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1:0] m2 [3];
    logic [3:0] m4 [9];
    logic [7:0] seen [27];
    m2 = '{2'b01, 2'b10, 2'b11};
    m4 = '{4'b0001, 4'b0010, 4'b0100, 4'b1000,
           4'b0011, 4'b0101, 4'b1010, 4'b1100, 4'b1111};
    for (int t = 0; t < 20; t++) begin
      a2 = rand_bits(256); b2 = rand_bits(256);
      a4 = rand_bits(64);  b4 = rand_bits(64);
      for (int s = 0; s < 3; s++) begin
        k2 = 2'(s); #1;
        check($sformatf("seg2 step %0d", s), i2a == xs2(a2, m2[s]) && i2b == xs2(b2, m2[s]));
      end
      for (int s = 0; s < 9; s++) begin
        k4 = 4'(s); #1;
        check($sformatf("seg4 step %0d", s), i4a == xs4(a4, m4[s]) && i4b == xs4(b4, m4[s]));
      end
    end
    // eight segments: recover each subset by probing with one-hot segments
    for (int s = 0; s < 27; s++) begin
      logic [7:0] m;
      logic       ok;
      k8 = 5'(s);
      m  = '0;
      for (int i = 0; i < 8; i++) begin
        a8 = 64'(8'h01) << (i * 8); b8 = 64'(8'h80) << (i * 8); #1;
        m[i] = (i8a == 8'h01) && (i8b == 8'h80);
        check("seg8 zero or one-hot", (i8a == 8'h00 && i8b == 8'h00) || m[i]);
      end
      seen[s] = m;
      // a valid Karatsuba subset: for each index bit, the set of values
      // taken is independent of the other bits (a product set)
      ok = (m != 0);
      for (int i = 0; i < 8; i++)
        for (int j = 0; j < 8; j++)
          if (m[i] && m[j]) begin
            // combining bits of two members must give a member
            for (int bmask = 0; bmask < 8; bmask++)
              if (!m[(i & bmask) | (j & ~bmask & 7)]) ok = 1'b0;
          end
      check($sformatf("seg8 step %0d product set", s), ok);
      if (s > 0) check("seg8 size order", $countones(seen[s]) >= $countones(seen[s-1]));
      for (int q = 0; q < s; q++) check("seg8 distinct", seen[q] != m);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
