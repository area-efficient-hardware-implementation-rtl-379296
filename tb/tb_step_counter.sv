// tb_step_counter -- checks the clock counter for 3 and 9 clocks per
// product: clk_cntr runs 0 .. STEPS-1 from the start cycle on, en is high in
// exactly those cycles, done pulses once, STEPS clock edges after start was
// sampled; start while busy is ignored and start in the done cycle begins
// the next product at once.
module tb_step_counter;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start3, en3, busy3, done3; logic [1:0] k3;
  logic start9, en9, busy9, done9; logic [3:0] k9;

  step_counter               dut3 (.clk, .rst_n, .start(start3), .en(en3), .clk_cntr(k3), .busy(busy3), .done(done3));
  step_counter #(.STEPS(9))  dut9 (.clk, .rst_n, .start(start9), .en(en9), .clk_cntr(k9), .busy(busy9), .done(done9));

  task automatic check(string name, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 8) $display("mismatch %s at %0t", name, $time);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // run one product of `steps` clocks on the chosen counter; extra_start
  // pulses start again in cycle `extra` (ignored, as busy)
  task automatic run(int which, int steps, int extra);
    for (int s = 0; s < steps; s++) begin
      @(negedge clk);
      if (which == 3) begin
        start3 = (s == 0) || (s == extra);
        #1;
        check("en3", en3); check("k3", k3 == 2'(s)); check("done3 low", !done3 || s == 0);
      end else begin
        start9 = (s == 0) || (s == extra);
        #1;
        check("en9", en9); check("k9", k9 == 4'(s)); check("done9 low", !done9 || s == 0);
      end
    end
    @(negedge clk);
    start3 = 0; start9 = 0;
    #1;
    if (which == 3) begin check("done3", done3); check("idle3", !busy3 && !en3); end
    else            begin check("done9", done9); check("idle9", !busy9 && !en9); end
  endtask

  initial begin
    start3 = 0; start9 = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk); #1;
    check("reset idle", !busy3 && !done3 && !en3 && !busy9 && !done9);
    run(3, 3, -1);
    run(3, 3, 1);                  // start while busy: ignored
    @(negedge clk);
    run(9, 9, 4);
    // back to back: a new start in the done cycle
    run(3, 3, -1);
    @(negedge clk); start3 = 0; #1;
    check("done pulse is one cycle", !done3);
    run(3, 3, -1);
    start3 = 1; #1;
    check("restart in done cycle: en", en3 && k3 == 0 && done3);
    @(negedge clk); start3 = 0; #1;
    check("restart in done cycle: step 1", en3 && k3 == 1 && busy3);
    repeat (3) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
