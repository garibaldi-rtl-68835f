// tb_helper_table: random instruction-side updates and data-side lookups on
// a small helper table (8 entries, 2 ways, 4 sets) against a reference model
// with the same replacement rule, plus the worked example mapping
// VPN ...f3cd19 -> PPN 0x0d1ab916 at the default 128-entry 4-way size.
module tb_helper_table;
  localparam int VW = 36, PW = 32, E = 8, W = 2, S = E / W;
  logic clk = 0, rst_n = 0;
  logic [VW-1:0] lk_vpn, up_vpn, lk2_vpn, up2_vpn;
  logic [PW-1:0] lk_ppn, up_ppn, lk2_ppn, up2_ppn;
  logic lk_hit, up_en, up_alloc, lk2_hit, up2_en, up2_alloc;
  int checks = 0, failures = 0;

  helper_table #(.ENTRIES(E), .WAYS(W)) dut (.*);
  helper_table dut_full (.clk, .rst_n, .lk_vpn(lk2_vpn), .lk_hit(lk2_hit), .lk_ppn(lk2_ppn),
                         .up_en(up2_en), .up_vpn(up2_vpn), .up_ppn(up2_ppn), .up_alloc(up2_alloc));
  always #5 clk = ~clk;

  bit m_v [S][W];
  longint m_vpn [S][W];
  longint m_ppn [S][W];
  int m_s [S][W];

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic int find(longint v);
    int s = int'(v % S);
    for (int w = 0; w < W; w++) if (m_v[s][w] && m_vpn[s][w] == v) return w;
    return -1;
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint v, p;
    int s, w, vic, nalloc = 0, nevict = 0;
    up_en = 0; up2_en = 0; lk_vpn = 0; up_vpn = 0; up_ppn = 0;
    lk2_vpn = 0; up2_vpn = 0; up2_ppn = 0;
    foreach (m_v[a, b]) m_v[a][b] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // worked example at full size
    @(negedge clk);
    up2_vpn = 36'hffff3cd19; up2_ppn = 32'h0d1ab916; up2_en = 1;
    @(negedge clk);
    up2_en = 0; lk2_vpn = 36'hffff3cd19; #1;
    chk(lk2_hit && lk2_ppn == 32'h0d1ab916, "worked example lookup");
    lk2_vpn = 36'hffff3cd1a; #1;
    chk(!lk2_hit, "neighbouring page misses");
    // random traffic at small size
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      v = longint'($urandom_range(0, 23)) * 5 + 64'h0000_0ff0_0000;
      if ($urandom_range(0, 1)) begin
        p = longint'($urandom());
        up_vpn = VW'(v); up_ppn = PW'(p); up_en = 1;
        #1;
        s = int'(v % S); w = find(v);
        chk(up_alloc == (w < 0), "up_alloc");
        if (w >= 0) begin
          m_ppn[s][w] = p; if (m_s[s][w] < 7) m_s[s][w]++;
        end else begin
          nalloc++;
          vic = -1;
          for (int k = 0; k < W; k++) if (vic < 0 && !m_v[s][k]) vic = k;
          if (vic < 0) begin
            nevict++;
            vic = 0;
            for (int k = 1; k < W; k++) if (m_s[s][k] < m_s[s][vic]) vic = k;
          end
          for (int k = 0; k < W; k++) if (m_v[s][k] && m_s[s][k] > 0) m_s[s][k]--;
          m_v[s][vic] = 1; m_vpn[s][vic] = v; m_ppn[s][vic] = p; m_s[s][vic] = 4;
        end
      end else begin
        up_en = 0; lk_vpn = VW'(v);
        #1;
        s = int'(v % S); w = find(v);
        chk(lk_hit == (w >= 0), $sformatf("lk_hit vpn=%0h", v));
        if (w >= 0) chk(lk_ppn == PW'(m_ppn[s][w]), "lk_ppn");
      end
    end
    chk(nevict > 10, "evictions exercised");
    $display("allocs=%0d evictions=%0d", nalloc, nevict);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
