// tb_qbs_repl_unit: random sets of 12 ways (priorities, instruction and
// prefetch flags) with a pair-table stand-in that protects a line when bit 0
// of its address is 1 and answers one cycle after each query. A reference
// walk computes the expected victim, demote mask and number of queries;
// the testbench checks all three and that done comes exactly 1 + queries
// cycles after the request, never more than 3.
module tb_qbs_repl_unit;
  localparam int W = 12, PW = 5, LW = 38;
  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, q_valid, q_resp_valid, q_protect, done;
  logic [PW-1:0] req_prio [W];
  logic [W-1:0] req_is_inst, req_is_pf, demote_mask;
  logic [LW-1:0] req_line [W];
  logic [LW-1:0] q_line;
  logic [3:0] victim_way;
  int checks = 0, failures = 0, nq_seen = 0;
  int hist [4];

  qbs_repl_unit dut (.*);
  always #5 clk = ~clk;

  // pair table stand-in, one-cycle lookup
  always_ff @(posedge clk) begin
    q_resp_valid <= q_valid;
    q_protect    <= q_valid && q_line[0];
    if (q_valid) nq_seen <= nq_seen + 1;
  end

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pr [W];
    bit ex [W];
    int cand, nq, ev, lat, q0;
    bit [W-1:0] dm;
    req_valid = 0;
    foreach (req_prio[i]) begin req_prio[i] = 0; req_line[i] = 0; end
    req_is_inst = 0; req_is_pf = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      for (int i = 0; i < W; i++) begin
        pr[i] = $urandom_range(0, 31);
        req_prio[i] = PW'(pr[i]);
        req_line[i] = LW'({$urandom(), $urandom()});
        req_is_inst[i] = ($urandom_range(0, 2) != 0);
        req_is_pf[i]   = ($urandom_range(0, 9) == 0);
        ex[i] = 0;
      end
      // reference walk
      nq = 0; dm = '0; ev = -1;
      while (ev < 0) begin
        cand = -1;
        for (int i = 0; i < W; i++) if (!ex[i] && (cand < 0 || pr[i] > pr[cand])) cand = i;
        if ((req_is_inst[cand] || req_is_pf[cand]) && nq < 2) begin
          nq++;
          if (req_line[cand][0]) begin ex[cand] = 1; dm[cand] = 1; end
          else ev = cand;
        end else ev = cand;
      end
      q0 = nq_seen;
      req_valid = 1;
      @(negedge clk);
      req_valid = 0;
      lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      chk(victim_way == 4'(ev), $sformatf("victim %0d exp %0d", victim_way, ev));
      chk(demote_mask == dm, "demote mask");
      @(negedge clk);
      chk(nq_seen - q0 == nq, "number of queries");
      chk(lat == 1 + nq && lat <= 3, $sformatf("latency %0d with %0d queries", lat, nq));
      hist[nq]++;
    end
    chk(hist[0] > 0 && hist[1] > 0 && hist[2] > 0, "0, 1 and 2 queries all exercised");
    $display("queries per selection: 0:%0d 1:%0d 2:%0d", hist[0], hist[1], hist[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
