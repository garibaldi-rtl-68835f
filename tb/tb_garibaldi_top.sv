// tb_garibaldi_top: end-to-end test of the Garibaldi module at its default
// size (40 cores, 16384-entry pair table, 100K-access colour periods).
// The testbench plays the LLC: it sends the module the stream of probed
// accesses, asks it for victims, and takes its prefetches.
//
// Directed part:
//  1. Core 3 fetches an instruction line whose PC page ...f3cd19 maps to
//     physical page 0x0d1ab916; a data access with PC ...f3cd19c04 to
//     0xdeedbeef000 is paired with instruction line 0x0d1ab916c00.
//  2. 40 further data hits raise that line's miss cost to 41 > 32: asked for a
//     victim in a set where this instruction line has the highest eviction
//     priority, the module queries once, demotes it and evicts the next way,
//     two cycles after the request.
//  3. The same PC from another core finds no helper entry and is not paired.
//  4. A cold instruction line whose data missed is evicted normally; its
//     instruction miss prefetches its recorded data line, and accesses stall
//     while the prefetch waits.
// Random part: 40 cores with 64 instruction pages each run four colour
// periods. In the first two, data accesses that follow an instruction miss
// mostly hit while others mostly miss (threshold must fall); in the last
// two the opposite (threshold must rise). Victim requests are made on
// recently used lines. Every mechanism (helper allocation and miss, pair-table
// allocation, replacement, update, preservation, field recording and match,
// prefetch, prefetch stall, query, protection, threshold rise and fall,
// colour advance) must occur at least once.
module tb_garibaldi_top;
  import garibaldi_pkg::*;
  localparam int NC = 40, W = 12, PER = 100000;

  logic clk = 0, rst_n = 0;
  logic acc_valid, acc_ready;
  llc_access_t acc;
  logic vr_valid, vr_ready, vr_done;
  logic [4:0] vr_prio [W];
  logic [W-1:0] vr_is_inst, vr_is_pf, vr_demote;
  line_t vr_line [W];
  logic [3:0] vr_victim;
  logic pf_valid, pf_ready;
  logic [0:0] pf_mask;
  line_t pf_line [1];
  logic [5:0] threshold;
  logic [2:0] color;
  gar_events_t events;

  garibaldi_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int n_ht_alloc, n_ht_miss, n_pt_alloc, n_pt_replace, n_pt_update, n_pt_preserve;
  int n_pt_record, n_pt_field_hit, n_pf, n_query, n_protect, n_inc, n_dec, n_period, n_stall;
  always @(posedge clk) if (rst_n) begin
    n_ht_alloc     <= n_ht_alloc     + int'(events.ht_alloc);
    n_ht_miss      <= n_ht_miss      + int'(events.ht_miss);
    n_pt_alloc     <= n_pt_alloc     + int'(events.pt_alloc);
    n_pt_replace   <= n_pt_replace   + int'(events.pt_replace);
    n_pt_update    <= n_pt_update    + int'(events.pt_update);
    n_pt_preserve  <= n_pt_preserve  + int'(events.pt_preserve);
    n_pt_record    <= n_pt_record    + int'(events.pt_record);
    n_pt_field_hit <= n_pt_field_hit + int'(events.pt_field_hit);
    n_pf           <= n_pf           + int'(events.pf_issue);
    n_query        <= n_query        + int'(events.qbs_query);
    n_protect      <= n_protect      + int'(events.qbs_protect);
    n_inc          <= n_inc          + int'(events.thr_inc);
    n_dec          <= n_dec          + int'(events.thr_dec);
    n_period       <= n_period       + int'(events.period_end);
    n_stall        <= n_stall        + int'(acc_valid && !acc_ready);
  end

  gar_events_t ev_last;

  task automatic access(input int core, input bit inst, input bit pf, input bit hit,
                        input longint pc, input longint pa);
    @(negedge clk);
    acc_valid = 1;
    acc.core = core_t'(core); acc.is_inst = inst; acc.is_prefetch = pf; acc.is_hit = hit;
    acc.pc = va_t'(pc); acc.pa = pa_t'(pa);
    #1;
    while (!acc_ready) begin @(negedge clk); pf_ready = 1; #1; end
    ev_last = events;
    @(negedge clk);
    acc_valid = 0;
  endtask

  // victim request; returns victim, demote mask and cycles to done
  task automatic victim(input int pr [W], input bit [W-1:0] inst, input longint ln [W],
                        output int vic, output bit [W-1:0] dem, output int lat);
    @(negedge clk);
    for (int i = 0; i < W; i++) begin vr_prio[i] = 5'(pr[i]); vr_line[i] = line_t'(ln[i]); end
    vr_is_inst = inst; vr_is_pf = '0;
    #1;
    while (!vr_ready) begin @(negedge clk); #1; end
    vr_valid = 1;
    @(negedge clk);
    vr_valid = 0;
    lat = 1;
    #1;
    while (!vr_done) begin @(negedge clk); #1; lat++; end
    vic = int'(vr_victim); dem = vr_demote;
  endtask

  // per-core recent instruction-miss PC (random part)
  longint last_imiss_pc [NC];
  longint recent_il [16];

  initial begin
    int pr [W];
    longint ln [W];
    int vic, lat;
    bit [W-1:0] dem;
    longint il_a, il_b;
    int phase_hi;

    acc_valid = 0; acc = '0; vr_valid = 0; vr_is_inst = 0; vr_is_pf = 0; pf_ready = 0;
    foreach (vr_prio[i]) begin vr_prio[i] = 0; vr_line[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(threshold == 32 && color == 0, "reset threshold 32, colour 0");

    // ---- 1. pairing through the helper table
    il_a = 64'h0d1ab916c00 >> 6;
    access(3, 1, 0, 0, 48'hffff3cd19c00, 44'h0d1ab916c00);
    chk(ev_last.ht_alloc, "instruction access allocates helper entry");
    access(3, 0, 0, 1, 48'hffff3cd19c04, 44'hdeedbeef000);
    chk(ev_last.pt_alloc && ev_last.pt_record && !ev_last.ht_miss,
        "data access paired with IL_PA 0x0d1ab916c00, entry allocated");
    // ---- 2. protection
    for (int i = 0; i < 40; i++) begin
      access(3, 0, 0, 1, 48'hffff3cd19c04, 44'hdeedbeef000);
      chk(ev_last.pt_update, "data hit updates the paired entry");
    end
    for (int i = 0; i < W; i++) begin pr[i] = i; ln[i] = 64'h100 + i; end
    pr[5] = 31; ln[5] = il_a; pr[9] = 30;
    victim(pr, 12'b0000_0010_0000, ln, vic, dem, lat);
    chk(dem == 12'b0000_0010_0000 && vic == 9 && lat == 2,
        $sformatf("hot instruction line protected: victim %0d demote %b latency %0d", vic, dem, lat));
    // a data line as top candidate is evicted without a query
    pr[5] = 3; pr[7] = 31;
    victim(pr, 12'b0000_0010_0000, ln, vic, dem, lat);
    chk(vic == 7 && dem == 0 && lat == 1, "data line evicted without query");
    // ---- 3. same PC from another core: no helper entry
    access(4, 0, 0, 1, 48'hffff3cd19c04, 44'hdeedbeef000);
    chk(ev_last.ht_miss && !ev_last.pt_update, "other core's helper table has no entry");
    // ---- 4. cold instruction line: evicted, then its miss prefetches its data
    il_b = 64'h0d1ab916d00 >> 6;
    access(3, 1, 0, 0, 48'hffff3cd19d00, 44'h0d1ab916d00);
    access(3, 0, 0, 0, 48'hffff3cd19d10, 44'h1234567040);
    chk(ev_last.pt_alloc, "cold pair allocated");
    pr[5] = 31; pr[7] = 3; ln[5] = il_b;
    victim(pr, 12'b0000_0010_0000, ln, vic, dem, lat);
    chk(vic == 5 && dem == 0 && lat == 2, "cold instruction line not protected, evicted");
    access(3, 1, 0, 0, 48'hffff3cd19d00, 44'h0d1ab916d00);
    chk(ev_last.pf_issue, "instruction miss triggers pair-wise prefetch");
    #1;
    chk(pf_valid && pf_mask == 1'b1 && pf_line[0] == line_t'(64'h1234567040 >> 6),
        "prefetch names the paired data line 0x1234567040");
    @(negedge clk);
    acc_valid = 1; acc.is_inst = 0; acc.is_hit = 1; acc.is_prefetch = 0;
    #1;
    chk(!acc_ready, "accesses stall while the prefetch waits");
    @(negedge clk);
    pf_ready = 1;
    @(negedge clk);
    acc_valid = 0;
    // the prefetched data fill reaches the LLC as a prefetch: no pairing update
    access(3, 0, 1, 0, 48'hffff3cd19d10, 44'h1234567040);
    chk(!ev_last.pt_update && !ev_last.pt_alloc, "prefetched data does not update the pair table");

    // ---- random part: four colour periods
    foreach (last_imiss_pc[c]) last_imiss_pc[c] = 0;
    foreach (recent_il[i]) recent_il[i] = il_a;
    for (int n = 0; n < 4 * PER + 10; n++) begin
      int core, pg, off, hot;
      longint pc, ipa, dpa;
      bit inst, hit, after_miss;
      hot = (n < 2 * PER) ? 1 : 0;
      core = $urandom_range(0, NC-1);
      pg = $urandom_range(0, 63);
      off = $urandom_range(0, 63);
      pc  = 48'hffff_8000_0000 + longint'(core) * 64'h40000 + longint'(pg) * 4096 + off * 64;
      ipa = 44'h100_0000_0000 + longint'(core) * 64'h40000 + longint'(pg) * 4096 + off * 64;
      inst = ($urandom_range(0, 2) == 0);
      pf_ready = ($urandom_range(0, 3) != 0);
      if (inst) begin
        hit = $urandom_range(0, 1);
        access(core, 1, 0, hit, pc, ipa);
        if (!hit) last_imiss_pc[core] = pc;
        recent_il[n % 16] = ipa >> 6;
      end else begin
        after_miss = ($urandom_range(0, 1) == 1) && last_imiss_pc[core] != 0;
        if (after_miss) pc = last_imiss_pc[core];
        dpa = 44'h200_0000_0000 + longint'($urandom_range(0, 4095)) * 4096
              + longint'($urandom_range(0, 3)) * 64;
        // half the data accesses after an instruction miss go to the line
        // that instruction always uses first
        if (after_miss && $urandom_range(0, 1) == 1)
          dpa = 44'h300_0000_0000 + ((pc >> 6) & 64'hffff) * 64;
        if (after_miss) hit = hot ? ($urandom_range(0, 9) != 0) : ($urandom_range(0, 19) == 0);
        else            hit = hot ? ($urandom_range(0, 9) < 2)  : ($urandom_range(0, 9) != 0);
        access(core, 0, 0, hit, pc + 4, dpa);
      end
      if (n % 64 == 63) begin
        for (int i = 0; i < W; i++) begin
          pr[i] = $urandom_range(0, 31);
          ln[i] = recent_il[$urandom_range(0, 15)];
        end
        victim(pr, 12'hfff, ln, vic, dem, lat);
        chk(lat >= 1 && lat <= 3, "victim latency within 1 + 2 queries");
      end
      if (n == 2 * PER + 5) begin
        phase_hi = threshold;
        chk(threshold < 32, $sformatf("threshold fell during hot phase (%0d)", threshold));
      end
    end
    chk(threshold > phase_hi, $sformatf("threshold rose during cold phase (%0d -> %0d)", phase_hi, threshold));
    chk(color == 3'd4, $sformatf("colour advanced four times (%0d)", color));

    $display("mechanisms: ht_alloc=%0d ht_miss=%0d pt_alloc=%0d pt_replace=%0d pt_update=%0d",
             n_ht_alloc, n_ht_miss, n_pt_alloc, n_pt_replace, n_pt_update);
    $display("  pt_preserve=%0d pt_record=%0d pt_field_hit=%0d prefetch=%0d pf_stall=%0d",
             n_pt_preserve, n_pt_record, n_pt_field_hit, n_pf, n_stall);
    $display("  query=%0d protect=%0d thr_inc=%0d thr_dec=%0d period_end=%0d threshold=%0d",
             n_query, n_protect, n_inc, n_dec, n_period, threshold);
    chk(n_ht_alloc > 0, "helper allocation happened");
    chk(n_ht_miss > 0, "helper miss happened");
    chk(n_pt_alloc > 0, "pair-table allocation happened");
    chk(n_pt_replace > 0, "pair-table replacement happened");
    chk(n_pt_update > 0, "pair-table update happened");
    chk(n_pt_preserve > 0, "pair-table preservation happened");
    chk(n_pt_record > 0, "DL_PA recording happened");
    chk(n_pt_field_hit > 0, "DL_PA field match happened");
    chk(n_pf > 0, "pair-wise prefetch happened");
    chk(n_stall > 0, "prefetch stall happened");
    chk(n_query > 0, "pair-table query happened");
    chk(n_protect > 0, "instruction protection happened");
    chk(n_inc > 0, "threshold increase happened");
    chk(n_dec > 0, "threshold decrease happened");
    chk(n_period > 0, "colour advance happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
