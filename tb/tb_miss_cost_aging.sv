// tb_miss_cost_aging: exhaustive check of the colour-based cost aging.
// Every (cost, last colour, current colour) triple is compared, for several
// thresholds, with aged = max(cost - ((cur - last) mod 8), 0) and
// protect = aged > threshold. Includes the worked example of a cost of 25
// written at colour 5, read at colour 0 against threshold 23: aged 22, not
// protected.
module tb_miss_cost_aging;
  logic [5:0] cost, thr, aged;
  logic [2:0] last, cur;
  logic       prot;
  int checks = 0, failures = 0;

  miss_cost_aging #(.COST_W(6), .COLOR_BITS(3)) dut (
    .cost, .last_color(last), .cur_color(cur), .threshold(thr),
    .aged_cost(aged), .protect(prot));

  task automatic check(input int c, input int l, input int u, input int t);
    int steps, exp_aged;
    bit exp_prot;
    cost = 6'(c); last = 3'(l); cur = 3'(u); thr = 6'(t);
    #1;
    steps    = (u - l + 8) % 8;
    exp_aged = (c > steps) ? c - steps : 0;
    exp_prot = exp_aged > t;
    checks++;
    if (aged != 6'(exp_aged) || prot != exp_prot) begin
      failures++;
      $display("FAIL cost=%0d last=%0d cur=%0d thr=%0d: aged=%0d/%0d prot=%0b/%0b",
               c, l, u, t, aged, exp_aged, prot, exp_prot);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(25, 5, 0, 23);
    checks++;
    if (aged != 22 || prot) begin failures++; $display("FAIL worked example"); end
    for (int t = 0; t < 64; t += 9)
      for (int c = 0; c < 64; c++)
        for (int l = 0; l < 8; l++)
          for (int u = 0; u < 8; u++) check(c, l, u, t);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
