// tb_perf_counter: random instruction and data accesses from 3 cores, PCs
// drawn from a small pool, against a reference model of the per-core lists of
// the 10 most recent instruction-miss PCs and of the four counters, with
// periodic clears. Also checks the directed case of the paper's figure: I1
// misses, D1 (hit) and D2 (miss) with I1's PC count total 2 / miss 1, and D3
// from a hitting instruction is not counted.
module tb_perf_counter;
  localparam int NC = 3, NP = 10, PW = 42;
  logic clk = 0, rst_n = 0;
  logic acc_valid, acc_is_inst, acc_hit, clear;
  logic [1:0] acc_core;
  logic [PW-1:0] acc_pcl;
  logic [31:0] cond_total, cond_miss, llc_acc, llc_miss;
  int checks = 0, failures = 0;

  perf_counter #(.NUM_CORES(NC), .PCS_PER_CORE(NP), .PCL_W(PW)) dut (.*);
  always #5 clk = ~clk;

  longint lst [NC][$];
  int m_ct, m_cm, m_la, m_lm;

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic bit listed(int c, longint p);
    foreach (lst[c][i]) if (lst[c][i] == p) return 1;
    return 0;
  endfunction

  task automatic acc(input int c, input bit inst, input bit hit, input longint p, input bit clr);
    bit l;
    @(negedge clk);
    acc_valid = 1; acc_core = 2'(c); acc_is_inst = inst; acc_hit = hit; acc_pcl = PW'(p);
    clear = clr;
    l = listed(c, p);
    if (clr) begin m_ct = 0; m_cm = 0; m_la = 0; m_lm = 0; end
    m_la++; if (!hit) m_lm++;
    if (!inst && l) begin m_ct++; if (!hit) m_cm++; end
    if (inst && !hit && !l) begin
      lst[c].push_front(p);
      if (lst[c].size() > NP) void'(lst[c].pop_back());
    end
    @(negedge clk);
    acc_valid = 0; clear = 0;
    chk(cond_total == 32'(m_ct) && cond_miss == 32'(m_cm) &&
        llc_acc == 32'(m_la) && llc_miss == 32'(m_lm),
        $sformatf("counters %0d/%0d %0d/%0d exp %0d/%0d %0d/%0d", cond_miss, cond_total,
                  llc_miss, llc_acc, m_cm, m_ct, m_lm, m_la));
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    acc_valid = 0; acc_core = 0; acc_is_inst = 0; acc_hit = 0; acc_pcl = 0; clear = 0;
    m_ct = 0; m_cm = 0; m_la = 0; m_lm = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // figure example
    acc(0, 1, 0, 100, 0);   // I1 miss
    acc(0, 0, 1, 100, 0);   // D1 hit
    acc(0, 0, 0, 100, 0);   // D2 miss
    acc(0, 1, 1, 200, 0);   // I2 hit
    acc(0, 0, 1, 200, 0);   // D3: not counted
    chk(cond_total == 2 && cond_miss == 1, "figure example P(D_miss|I_miss) = 1/2");
    // random
    for (int n = 0; n < 5000; n++)
      acc($urandom_range(0, NC-1), $urandom_range(0, 2) == 0, $urandom_range(0, 1),
          longint'($urandom_range(0, 30)), $urandom_range(0, 199) == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
