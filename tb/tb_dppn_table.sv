// tb_dppn_table: random record and read traffic against a reference model of
// the tagless D_PPN table (16 entries, page numbers drawn from a small pool so
// that entries are shared, reinforced, weakened and replaced).
// Checks rec_match and rec_will_hold before each record, and both read ports
// against the model after it.
module tb_dppn_table;
  localparam int N = 16, PW = 12, IW = 4;
  logic clk = 0, rst_n = 0;
  logic rec_en;
  logic [PW-1:0] rec_ppn;
  logic [IW-1:0] rec_idx;
  logic rec_match, rec_will_hold;
  logic [IW-1:0] rd_idx [2];
  logic rd_valid [2];
  logic [PW-1:0] rd_ppn [2];
  int checks = 0, failures = 0;

  dppn_table #(.ENTRIES(N), .PPN_W(PW), .NRD(2)) dut (.*);
  always #5 clk = ~clk;

  // model
  bit m_v [N];
  int m_hi [N];
  int m_s [N];

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int p, i, hi, nrec = 0, nrepl = 0, nweak = 0;
    bit em, eh;
    rec_en = 0; rec_ppn = 0; rd_idx[0] = 0; rd_idx[1] = 0;
    foreach (m_v[k]) m_v[k] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      p = $urandom_range(0, 47) * 7 + 3;   // 48 pages over 16 entries
      i = p % N; hi = p / N;
      rec_ppn = PW'(p);
      rec_en  = 1;
      #1;
      em = m_v[i] && m_hi[i] == hi;
      // model update
      if (!m_v[i]) begin m_v[i] = 1; m_hi[i] = hi; m_s[i] = 4; eh = 1; end
      else if (em) begin if (m_s[i] < 7) m_s[i]++; eh = 1; end
      else if (m_s[i] - 1 < 4) begin m_hi[i] = hi; m_s[i] = 4; eh = 1; nrepl++; end
      else begin m_s[i]--; eh = 0; nweak++; end
      chk(rec_idx == IW'(i), "rec_idx");
      chk(rec_match == em, $sformatf("rec_match p=%0d", p));
      chk(rec_will_hold == eh, $sformatf("will_hold p=%0d", p));
      nrec++;
      @(negedge clk);
      rec_en = 0;
      rd_idx[0] = IW'($urandom_range(0, N-1));
      rd_idx[1] = IW'(i);
      #1;
      for (int r = 0; r < 2; r++) begin
        chk(rd_valid[r] == m_v[rd_idx[r]], "rd_valid");
        if (m_v[rd_idx[r]])
          chk(rd_ppn[r] == PW'(m_hi[rd_idx[r]] * N + int'(rd_idx[r])), "rd_ppn");
      end
    end
    chk(nrepl > 0 && nweak > 0, "replacement and weakening both exercised");
    $display("records=%0d replaced=%0d weakened=%0d", nrec, nrepl, nweak);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
