// tb_pair_table: the main pair table against a reference model.
//
// Part 1 (directed, K = 1): a data line that keeps hitting raises its
// instruction line's miss cost until a query protects it; colour steps age the
// cost (cost 25 written at colour 5, queried at colour 0 with threshold 23:
// not protected); a colliding instruction line is refused while the resident
// entry's aged cost is above the threshold and takes the entry afterwards; an
// instruction miss on an unprotected line emits a prefetch of the recorded
// data line and holds it until accepted; a new data line following an
// instruction miss replaces the field.
// Part 2 (random, K = 2, 8 entries, 4-entry D_PPN table): random data
// accesses, instruction misses, queries, colours and thresholds, with every
// event, query answer and prefetch group compared with the model.
module tb_pair_table;
  localparam int LW = 38, PFW = 6;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------- DUT 1 (K=1)
  logic a_in_valid, a_in_ready, a_is_inst, a_hit, a_q_valid, a_q_resp_valid, a_q_protect;
  logic a_pf_valid, a_pf_ready;
  logic [0:0] a_pf_mask;
  logic [LW-1:0] a_il, a_dl, a_q_line;
  logic [LW-1:0] a_pf_line [1];
  logic [5:0] a_thr;
  logic [2:0] a_color;
  logic a_alloc, a_repl, a_upd, a_pres, a_rec, a_fhit, a_pf;

  pair_table #(.ENTRIES(16), .K(1), .DPPN_ENTRIES(8)) dut1 (
    .clk, .rst_n, .in_valid(a_in_valid), .in_ready(a_in_ready), .in_is_inst(a_is_inst),
    .in_hit(a_hit), .in_il_line(a_il), .in_dl_line(a_dl), .threshold(a_thr), .cur_color(a_color),
    .q_valid(a_q_valid), .q_line(a_q_line), .q_resp_valid(a_q_resp_valid), .q_protect(a_q_protect),
    .pf_valid(a_pf_valid), .pf_ready(a_pf_ready), .pf_mask(a_pf_mask), .pf_line(a_pf_line),
    .ev_alloc(a_alloc), .ev_replace(a_repl), .ev_update(a_upd), .ev_preserve(a_pres),
    .ev_record(a_rec), .ev_field_hit(a_fhit), .ev_pf(a_pf));

  // one access on DUT 1; returns the event pulses seen in that cycle
  task automatic a_acc(input bit inst, input bit hit, input longint il, input longint dl,
                       output bit [6:0] ev);
    @(negedge clk);
    a_in_valid = 1; a_is_inst = inst; a_hit = hit; a_il = LW'(il); a_dl = LW'(dl);
    #1;
    ev = {a_alloc, a_repl, a_upd, a_pres, a_rec, a_fhit, a_pf};
    chk(a_in_ready, "ready for access");
    @(negedge clk);
    a_in_valid = 0;
  endtask

  task automatic a_query(input longint il, output bit prot);
    @(negedge clk);
    a_q_valid = 1; a_q_line = LW'(il);
    @(negedge clk);
    a_q_valid = 0;
    chk(a_q_resp_valid, "query answered after one cycle");
    prot = a_q_protect;
  endtask

  // ------------------------------------------------------------- DUT 2 (K=2)
  localparam int E = 8, D = 4, K = 2;
  logic b_in_valid, b_in_ready, b_is_inst, b_hit, b_q_valid, b_q_resp_valid, b_q_protect;
  logic b_pf_valid, b_pf_ready;
  logic [K-1:0] b_pf_mask;
  logic [LW-1:0] b_il, b_dl, b_q_line;
  logic [LW-1:0] b_pf_line [K];
  logic [5:0] b_thr;
  logic [2:0] b_color;
  logic b_alloc, b_repl, b_upd, b_pres, b_rec, b_fhit, b_pf;

  pair_table #(.ENTRIES(E), .K(K), .DPPN_ENTRIES(D)) dut2 (
    .clk, .rst_n, .in_valid(b_in_valid), .in_ready(b_in_ready), .in_is_inst(b_is_inst),
    .in_hit(b_hit), .in_il_line(b_il), .in_dl_line(b_dl), .threshold(b_thr), .cur_color(b_color),
    .q_valid(b_q_valid), .q_line(b_q_line), .q_resp_valid(b_q_resp_valid), .q_protect(b_q_protect),
    .pf_valid(b_pf_valid), .pf_ready(b_pf_ready), .pf_mask(b_pf_mask), .pf_line(b_pf_line),
    .ev_alloc(b_alloc), .ev_replace(b_repl), .ev_update(b_upd), .ev_preserve(b_pres),
    .ev_record(b_rec), .ev_field_hit(b_fhit), .ev_pf(b_pf));

  // reference model
  bit     m_v [E];
  longint m_tag [E];
  int     m_cost [E], m_col [E];
  int     f_pfo [E][K], f_didx [E][K], f_old [E][K], f_s [E][K];
  bit     d_v [D];
  longint d_hi [D];
  int     d_s [D];

  function automatic int aged(int c, int last, int cur);
    int st;
    st = (cur - last + 8) % 8;
    return (c > st) ? c - st : 0;
  endfunction

  // D_PPN record; returns {match_before, will_hold}
  function automatic bit [1:0] d_record(longint ppn);
    int i;
    longint hi;
    bit mt;
    i = int'(ppn % D);
    hi = ppn / D;
    mt = d_v[i] && d_hi[i] == hi;
    if (!d_v[i]) begin d_v[i] = 1; d_hi[i] = hi; d_s[i] = 4; return 2'b01; end
    if (mt) begin if (d_s[i] < 7) d_s[i]++; return 2'b11; end
    if (d_s[i] - 1 < 4) begin d_hi[i] = hi; d_s[i] = 4; return 2'b01; end
    d_s[i]--; return 2'b00;
  endfunction

  int ev_count [7];

  initial begin
    bit [6:0] ev;
    bit prot, anyold, fm, fo;
    bit [1:0] dr;
    int c0, fi, oi, idx, cur, thr, nd;
    longint il, dl, tg, ppn, pfo;
    bit [K-1:0] emask;
    longint eline [K];

    a_in_valid = 0; a_is_inst = 0; a_hit = 0; a_il = 0; a_dl = 0; a_q_valid = 0; a_q_line = 0;
    a_pf_ready = 0; a_thr = 32; a_color = 0;
    b_in_valid = 0; b_is_inst = 0; b_hit = 0; b_il = 0; b_dl = 0; b_q_valid = 0; b_q_line = 0;
    b_pf_ready = 1; b_thr = 3; b_color = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // ================= Part 1: directed =================
    // instruction line A = 0x0d1ab916c00 >> 6, data line X = 0xdeedbeef000 >> 6
    a_color = 5; a_thr = 23;
    a_acc(0, 1, 64'h0d1ab916c00 >> 6, 64'hdeedbeef000 >> 6, ev);
    chk(ev[6] && !ev[5] && ev[2], "first data access allocates and records");
    for (int i = 0; i < 24; i++) begin
      a_acc(0, 1, 64'h0d1ab916c00 >> 6, 64'hdeedbeef000 >> 6, ev);
      chk(ev[4], "data hit updates");
    end
    // cost now 25 at colour 5
    a_query(64'h0d1ab916c00 >> 6, prot);
    chk(prot, "cost 25 > 23 protected at the same colour");
    a_color = 0;
    a_query(64'h0d1ab916c00 >> 6, prot);
    chk(!prot, "aged cost 22 not above 23 at colour 0");
    a_thr = 21;
    a_query(64'h0d1ab916c00 >> 6, prot);
    chk(prot, "aged cost 22 above 21");
    // collision: same index (16 entries), other tag; entry A aged 22 > 21: preserved
    a_acc(0, 0, (64'h0d1ab916c00 >> 6) + 16, 64'h1000 >> 6, ev);
    chk(ev[3] && !ev[6], "colliding line refused while resident entry protected");
    a_thr = 30;
    a_query(64'h0d1ab916c00 >> 6, prot);
    chk(!prot, "aged 22 not above 30");
    // instruction miss on unprotected A: prefetch X
    a_acc(1, 0, 64'h0d1ab916c00 >> 6, 0, ev);
    chk(ev[0], "instruction miss issues pair-wise prefetch");
    chk(a_pf_valid && a_pf_mask == 1'b1 && a_pf_line[0] == LW'(64'hdeedbeef000 >> 6),
        "prefetch carries the recorded data line");
    @(negedge clk);
    chk(a_pf_valid && !a_in_ready, "prefetch held until accepted, access stalled");
    a_pf_ready = 1;
    @(negedge clk);
    chk(!a_pf_valid && a_in_ready, "prefetch accepted");
    a_pf_ready = 0;
    // after the instruction miss the old bit is set: a different data line Y replaces field
    a_acc(0, 0, 64'h0d1ab916c00 >> 6, 64'hbeef0040 >> 6, ev);
    chk(ev[4] && ev[2], "new data line after instruction miss recorded");
    a_acc(0, 0, 64'h0d1ab916c00 >> 6, 64'hbeef0080 >> 6, ev);
    chk(ev[4] && !ev[2], "later data lines bypass recording (old bit cleared)");
    a_acc(1, 0, 64'h0d1ab916c00 >> 6, 0, ev);
    chk(ev[0] && a_pf_line[0] == LW'(64'hbeef0040 >> 6), "prefetch now names the new line");
    a_pf_ready = 1; @(negedge clk); a_pf_ready = 0;
    a_acc(0, 1, 64'h0d1ab916c00 >> 6, 64'hbeef0040 >> 6, ev);
    chk(ev[1] && !ev[2], "matching data line reinforces field");
    // colliding line now takes the entry (aged cost below threshold 30)
    a_acc(0, 1, (64'h0d1ab916c00 >> 6) + 16, 64'h1000 >> 6, ev);
    chk(ev[6] && ev[5], "colliding line replaces unprotected entry");
    a_query(64'h0d1ab916c00 >> 6, prot);
    chk(!prot, "replaced line is gone");
    // protected instruction miss: no prefetch
    a_thr = 0;
    a_acc(1, 0, (64'h0d1ab916c00 >> 6) + 16, 0, ev);
    chk(!ev[0], "protected line's instruction miss does not prefetch");

    // ================= Part 2: random vs model (K=2) =================
    foreach (m_v[i]) m_v[i] = 0;
    foreach (d_v[i]) d_v[i] = 0;
    for (int n = 0; n < 20000; n++) begin
      @(negedge clk);
      if ($urandom_range(0, 199) == 0) b_color = b_color + 1;
      if ($urandom_range(0, 99) == 0) b_thr = 6'($urandom_range(0, 8));
      b_pf_ready = ($urandom_range(0, 3) != 0);
      cur = b_color; thr = b_thr;
      il = longint'($urandom_range(0, 23));
      dl = longint'($urandom_range(0, 11)) * 64 * 3 + longint'($urandom_range(0, 2));
      idx = int'(il % E); tg = il / E;
      ppn = dl / 64; pfo = dl % 64;
      b_il = LW'(il); b_dl = LW'(dl); b_hit = $urandom_range(0, 2) != 0;
      b_is_inst = $urandom_range(0, 3) == 0;
      b_in_valid = $urandom_range(0, 3) != 0;
      b_q_valid = $urandom_range(0, 1); b_q_line = LW'($urandom_range(0, 23));
      #1;
      // query answer, expected at the next edge
      begin
        int qi;
        qi = int'(b_q_line % E);
        prot = b_q_valid && m_v[qi] && m_tag[qi] == longint'(b_q_line) / E &&
               aged(m_cost[qi], m_col[qi], cur) > thr;
      end
      ev = '0; emask = '0;
      if (b_in_valid && b_in_ready) begin
        bit hitentry;
        int ag;
        hitentry = m_v[idx] && m_tag[idx] == tg;
        ag = m_v[idx] ? aged(m_cost[idx], m_col[idx], cur) : 0;
        if (!b_is_inst) begin
          if (hitentry) begin
            ev[4] = 1;
            m_cost[idx] = b_hit ? (ag < 63 ? ag + 1 : 63) : (ag > 0 ? ag - 1 : 0);
            if (m_col[idx] != cur) for (int j = 0; j < K; j++) f_old[idx][j] = 1;
            m_col[idx] = cur;
            anyold = 0;
            for (int j = 0; j < K; j++) anyold |= f_old[idx][j] != 0;
            if (anyold) begin
              int di;
              bit dmatch;
              di = int'(ppn % D);
              dmatch = d_v[di] && d_hi[di] == ppn / D;
              dr = d_record(ppn);
              fm = 0; fo = 0; fi = 0; oi = 0;
              for (int j = 0; j < K; j++) begin
                if (!fm && f_s[idx][j] != 0 && f_pfo[idx][j] == pfo && f_didx[idx][j] == di && dmatch)
                  begin fm = 1; fi = j; end
                if (!fo && f_old[idx][j] != 0) begin fo = 1; oi = j; end
              end
              if (fm) begin
                ev[1] = 1; f_old[idx][fi] = 0; if (f_s[idx][fi] < 7) f_s[idx][fi]++;
              end else begin
                f_old[idx][oi] = 0;
                nd = f_s[idx][oi] > 0 ? f_s[idx][oi] - 1 : 0;
                f_s[idx][oi] = nd;
                if (nd < 4 && dr[0]) begin
                  ev[2] = 1; f_pfo[idx][oi] = int'(pfo); f_didx[idx][oi] = di; f_s[idx][oi] = 4;
                end
              end
            end
          end else if (m_v[idx] && ag > thr) begin
            ev[3] = 1;
            m_cost[idx] = ag;
            if (m_col[idx] != cur) for (int j = 0; j < K; j++) f_old[idx][j] = 1;
            m_col[idx] = cur;
          end else begin
            ev[6] = 1; ev[5] = m_v[idx];
            dr = d_record(ppn);
            m_v[idx] = 1; m_tag[idx] = tg; m_col[idx] = cur; m_cost[idx] = b_hit ? 1 : 0;
            for (int j = 0; j < K; j++) begin f_old[idx][j] = 1; f_s[idx][j] = 0; f_pfo[idx][j] = 0; f_didx[idx][j] = 0; end
            if (dr[0]) begin
              ev[2] = 1; f_pfo[idx][0] = int'(pfo); f_didx[idx][0] = int'(ppn % D);
              f_old[idx][0] = 0; f_s[idx][0] = 4;
            end
          end
        end else if (!b_hit && hitentry) begin
          for (int j = 0; j < K; j++) begin
            emask[j] = f_s[idx][j] != 0 && d_v[f_didx[idx][j]];
            eline[j] = (d_hi[f_didx[idx][j]] * D + f_didx[idx][j]) * 64 + f_pfo[idx][j];
            f_old[idx][j] = 1;
          end
          ev[0] = !(ag > thr) && emask != 0;
        end
      end
      chk(ev == {b_alloc, b_repl, b_upd, b_pres, b_rec, b_fhit, b_pf},
          $sformatf("n=%0d events %b exp %b", n, {b_alloc, b_repl, b_upd, b_pres, b_rec, b_fhit, b_pf}, ev));
      for (int j = 0; j < 7; j++) ev_count[j] += ev[j];
      @(negedge clk);
      chk(b_q_resp_valid == b_q_valid, "query response valid");
      if (b_q_valid) chk(b_q_protect == prot, $sformatf("n=%0d query protect", n));
      if (ev[0]) begin
        chk(b_pf_valid && b_pf_mask == emask, "prefetch mask");
        for (int j = 0; j < K; j++)
          if (emask[j]) chk(b_pf_line[j] == LW'(eline[j]), "prefetch line");
      end
      b_in_valid = 0; b_q_valid = 0;
    end
    for (int j = 0; j < 7; j++) chk(ev_count[j] > 0, $sformatf("event %0d exercised", j));
    $display("events pf=%0d fhit=%0d rec=%0d pres=%0d upd=%0d repl=%0d alloc=%0d",
             ev_count[0], ev_count[1], ev_count[2], ev_count[3], ev_count[4], ev_count[5], ev_count[6]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
