// tb_threshold_unit: drives the period counter with access pulses and the
// statistics inputs with chosen values (PERIOD reduced to 20). Checks that the
// colour advances exactly every PERIOD accesses, that the threshold starts at
// 32, drops by one when P(D_miss|I_miss) is well under the LLC miss rate,
// rises by one when it is above, holds when close or without samples, and
// saturates at 0 and 63.
module tb_threshold_unit;
  localparam int PER = 20;
  logic clk = 0, rst_n = 0;
  logic acc_valid;
  logic [31:0] cond_total, cond_miss, llc_acc, llc_miss;
  logic period_end, thr_inc, thr_dec;
  logic [5:0] threshold;
  logic [2:0] color;
  int checks = 0, failures = 0;

  threshold_unit #(.PERIOD(PER)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // run one period with the given statistics; expect delta on the threshold
  task automatic period(input int ct, input int cm, input int la, input int lm, input int delta);
    int t0, c0, cyc;
    t0 = threshold; c0 = color; cyc = 0;
    cond_total = ct; cond_miss = cm; llc_acc = la; llc_miss = lm;
    for (int i = 0; i < PER; i++) begin
      @(negedge clk); acc_valid = 1;
      chk(!period_end, "no period end inside the period");
    end
    @(negedge clk); acc_valid = 0;
    chk(period_end, "period end after PERIOD accesses");
    @(negedge clk);
    chk(color == 3'(c0 + 1), "colour advanced");
    if (t0 + delta < 0)       chk(threshold == 0, "saturate at 0");
    else if (t0 + delta > 63) chk(threshold == 63, "saturate at 63");
    else chk(threshold == 6'(t0 + delta), $sformatf("threshold %0d exp %0d", threshold, t0 + delta));
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    acc_valid = 0; cond_total = 0; cond_miss = 0; llc_acc = 0; llc_miss = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(threshold == 32 && color == 0, "reset values");
    period(100, 10, 1000, 500, -1);   // 0.10 vs 0.50: decrease
    period(100, 80, 1000, 500, +1);   // 0.80 vs 0.50: increase
    period(100, 48, 1000, 500, 0);    // 0.48 vs 0.50: within margin, hold
    period(0, 0, 1000, 500, 0);       // no samples: hold
    for (int i = 0; i < 40; i++) period(10, 0, 100, 50, -1);   // down to 0
    for (int i = 0; i < 70; i++) period(10, 9, 100, 10, +1);   // up to 63
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
