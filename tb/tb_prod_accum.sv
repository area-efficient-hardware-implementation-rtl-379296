// tb_prod_accum -- drives the accumulation block with the partial products
// of random operands, computed here by shift-and-XOR multiplication of the
// segment sums, one per clock, and compares the collected segments with the
// directly computed full product. Configurations: two segments (expanded
// update), four segments (the nine-clock chained sequence) and eight
// segments (expanded update, 27 clocks). The operand subsets of the 2- and
// 4-segment schedules are written out by hand; for 8 segments they are read
// from the subset table of the design, while the expected result remains the
// independent full product.
module tb_prod_accum;
  import tb_ref_pkg::*;
  localparam int SB2 = 16, SB4 = 16, SB8 = 8;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic en2, en4, en8;
  logic [1:0] k2; logic [3:0] k4; logic [4:0] k8;
  logic [2*SB2-2:0] pr2; logic [2*SB4-2:0] pr4; logic [2*SB8-2:0] pr8;
  logic [4*SB2-1:0] c2;  logic [8*SB4-1:0] c4;  logic [16*SB8-1:0] c8;

  prod_accum #(.SEGMENTS(2), .SEG_BITS(SB2)) dut2 (.clk, .rst_n, .en(en2), .clk_cntr(k2), .pr(pr2), .c(c2));
  prod_accum #(.SEGMENTS(4), .SEG_BITS(SB4)) dut4 (.clk, .rst_n, .en(en4), .clk_cntr(k4), .pr(pr4), .c(c4));
  prod_accum #(.SEGMENTS(8), .SEG_BITS(SB8)) dut8 (.clk, .rst_n, .en(en8), .clk_cntr(k8), .pr(pr8), .c(c8));

  task automatic check(string name, prod_t got, prod_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 5) $display("mismatch %s got=%h exp=%h", name, got, exp);
    end
  endtask

  function automatic op_t seg_xor(op_t v, int sb, int nseg, logic [15:0] m);
    op_t r = '0;
    for (int i = 0; i < nseg; i++) if (m[i]) r ^= (v >> (i * sb)) & ((op_t'(1) << sb) - 1);
    return r;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] m2 [3];
    logic [15:0] m4 [9];
    ik_pkg::seg_table_t t8;
    op_t a, b;
    logic [8*SB4-1:0] c4_snap;
    m2 = '{16'h1, 16'h2, 16'h3};
    m4 = '{16'h1, 16'h2, 16'h4, 16'h8, 16'h3, 16'h5, 16'ha, 16'hc, 16'hf};
    t8 = ik_pkg::subset_table(8);
    en2 = 0; en4 = 0; en8 = 0; k2 = 0; k4 = 0; k8 = 0; pr2 = 0; pr4 = 0; pr8 = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      // two segments
      a = (t == 0) ? ~op_t'(0) & ((op_t'(1) << 32) - 1) : rand_bits(2 * SB2);
      b = (t == 0) ? ~op_t'(0) & ((op_t'(1) << 32) - 1) : rand_bits(2 * SB2);
      for (int s = 0; s < 3; s++) begin
        @(negedge clk);
        en2 = 1; k2 = 2'(s);
        pr2 = (2*SB2-1)'(clmul(seg_xor(a, SB2, 2, m2[s]), seg_xor(b, SB2, 2, m2[s])));
      end
      @(negedge clk); en2 = 0;
      check("seg2", prod_t'(c2), clmul(a, b));
      // four segments
      a = rand_bits(4 * SB4); b = rand_bits(4 * SB4);
      for (int s = 0; s < 9; s++) begin
        @(negedge clk);
        en4 = 1; k4 = 4'(s);
        pr4 = (2*SB4-1)'(clmul(seg_xor(a, SB4, 4, m4[s]), seg_xor(b, SB4, 4, m4[s])));
      end
      @(negedge clk); en4 = 0;
      check("seg4", prod_t'(c4), clmul(a, b));
      c4_snap = c4;
      // eight segments
      a = rand_bits(8 * SB8); b = rand_bits(8 * SB8);
      for (int s = 0; s < 27; s++) begin
        @(negedge clk);
        en8 = 1; k8 = 5'(s);
        pr8 = (2*SB8-1)'(clmul(seg_xor(a, SB8, 8, t8[s]), seg_xor(b, SB8, 8, t8[s])));
      end
      @(negedge clk); en8 = 0;
      check("seg8", prod_t'(c8), clmul(a, b));
      // with en low the segments must hold
      @(negedge clk); k4 = 0; pr4 = '1;
      @(negedge clk);
      check("seg4 hold", prod_t'(c4), prod_t'(c4_snap));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
