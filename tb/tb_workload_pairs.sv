// tb_workload_pairs: two synthetic server-style workloads run through a
// behavioural shared LLC, once with the Garibaldi module steering replacement
// and once with plain LRU, on the same access stream.
//
// The LLC model has SETS sets of 12 ways, LRU ranks as the base policy's
// eviction priority (rank 11 = evict first), and a per-line instruction bit
// and prefetched bit. Only the garibaldi_top instance is design code.
//
// Workload ("many-to-few", the class of server workloads in which the paper
// finds instruction victims): NI instruction lines on two cores, each on its
// own code page, are fetched once per round in a shuffled order. Right after
// its fetch, instruction i touches one of NH hot data lines (NI/NH
// instructions share each hot line). Every fetch is also followed by NS
// streaming data accesses to never-reused lines, issued by one streaming
// instruction per core. Per set and round the stream brings 12 new lines, so
// under LRU an instruction line (reuse distance: one round) is always evicted,
// while the hot data (reused four times per round) stays.
//
// With Garibaldi, the hot data hits raise the miss cost of each instruction
// line until it is protected, and its instruction misses should mostly
// disappear. Checks, over the second half of the run:
//  * under LRU more than 60% of the fetches miss (the shuffled order makes
//    some reuse distances short enough to hit);
//  * instruction misses with Garibaldi are at most half of those under LRU;
//  * the hot data still hits at least 90% of the time;
//  * instruction lines are protected, and every line the module demotes is a
//    hot-paired instruction line, never a data line or the streaming
//    instruction.
// Overall LLC misses stay about equal: the instruction lines that now stay
// cached take room from the stream, the trade the paper describes.
//
// The second scenario, "cold pairs", is the same except that each
// instruction's data access goes to a fresh line, so both sides of every pair
// are cold (the paper's example of such a workload is kafka). Then nothing
// may be protected, instruction misses stay within 10% of LRU (the pair-wise
// prefetches of cold data add some pressure), and at least 90% of the
// instruction misses issue a pair-wise prefetch of their recorded data line.
// Over both scenarios the threshold must have been adjusted. It mostly rises
// here: the streaming instruction's fetch is often the most recent instruction
// miss of its core, so the stream's misses dominate P(D_miss | I_miss).
// The colour period is shortened to 8192 accesses so that several threshold
// updates happen; everything else is at the module's defaults.
module tb_workload_pairs;
  import garibaldi_pkg::*;
  localparam int W = 12, SETS = 16, NI = 64, NH = 16, NS = 3, ROUNDS = 200;
  localparam int PER = 8192;

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

  garibaldi_top #(.PERIOD(PER)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_query, n_protect, n_pf, n_dec, n_inc;
  always @(posedge clk) if (rst_n) begin
    n_query   <= n_query   + int'(events.qbs_query);
    n_protect <= n_protect + int'(events.qbs_protect);
    n_pf      <= n_pf      + int'(events.pf_issue);
    n_dec     <= n_dec     + int'(events.thr_dec);
    n_inc     <= n_inc     + int'(events.thr_inc);
  end

  // ---------------- behavioural LLC: model 0 with Garibaldi, model 1 LRU only
  line_t tagm [2][SETS][W];
  bit    vld  [2][SETS][W];
  int    age  [2][SETS][W];
  bit    isi  [2][SETS][W];
  bit    ispf [2][SETS][W];

  function automatic int set_of(line_t ln);
    return int'(ln % line_t'(SETS));
  endfunction

  function automatic int find(int m, line_t ln);
    int s = set_of(ln);
    for (int w = 0; w < W; w++) if (vld[m][s][w] && tagm[m][s][w] == ln) return w;
    return -1;
  endfunction

  // make way w the most recently used
  function automatic void touch(int m, int s, int w);
    for (int v = 0; v < W; v++)
      if (v != w && vld[m][s][v] && age[m][s][v] < age[m][s][w]) age[m][s][v]++;
    age[m][s][w] = 0;
  endfunction

  function automatic int free_way(int m, int s);
    for (int w = 0; w < W; w++) if (!vld[m][s][w]) return w;
    return -1;
  endfunction

  function automatic int lru_way(int m, int s);
    for (int w = 0; w < W; w++) if (age[m][s][w] == W - 1) return w;
    return 0;
  endfunction

  function automatic void place(int m, int s, int w, line_t ln, bit inst, bit pf);
    if (!vld[m][s][w]) age[m][s][w] = W;
    vld[m][s][w] = 1; tagm[m][s][w] = ln; isi[m][s][w] = inst; ispf[m][s][w] = pf;
    touch(m, s, w);
  endfunction

  // hot-paired instruction lines, for checking what gets protected
  bit hot_inst [line_t];
  int n_demote_checked;

  // scenario state and statistics
  int order [NI];
  longint sc;
  int pf_seen;
  int im_g, im_l, i_acc, pd_acc, pd_hit_g, pd_hit_l, all_miss_g, all_miss_l, all_acc;
  int thr_min, protect_meas, pf_meas;

  // victim selection for model 0 through the module
  task automatic fill_garibaldi(line_t ln, bit inst, bit pf);
    int s = set_of(ln);
    int w = free_way(0, s);
    if (w < 0) begin
      @(negedge clk);
      for (int v = 0; v < W; v++) begin
        vr_prio[v] = 5'(age[0][s][v]); vr_line[v] = tagm[0][s][v];
        vr_is_inst[v] = isi[0][s][v]; vr_is_pf[v] = ispf[0][s][v];
      end
      #1;
      while (!vr_ready) begin @(negedge clk); #1; end
      vr_valid = 1;
      @(negedge clk);
      vr_valid = 0;
      #1;
      while (!vr_done) begin @(negedge clk); #1; end
      for (int v = 0; v < W; v++) if (vr_demote[v]) begin
        chk(isi[0][s][v] && hot_inst.exists(tagm[0][s][v]),
            $sformatf("protected line %h is a hot-paired instruction line", tagm[0][s][v]));
        n_demote_checked++;
        touch(0, s, v);
      end
      w = int'(vr_victim);
    end
    place(0, s, w, ln, inst, pf);
  endtask

  function automatic void fill_lru(line_t ln, bit inst);
    int s = set_of(ln);
    int w = free_way(1, s);
    if (w < 0) w = lru_way(1, s);
    place(1, s, w, ln, inst, 0);
  endfunction

  // one LLC access through both models; returns the hit status of each
  task automatic llc(input int core, input bit inst, input longint pc, input line_t ln,
                     output bit hit_g, output bit hit_l);
    int wg = find(0, ln);
    int wl = find(1, ln);
    hit_g = (wg >= 0);
    hit_l = (wl >= 0);
    // hand the probed access to the module
    @(negedge clk);
    acc_valid = 1;
    acc.core = core_t'(core); acc.is_inst = inst; acc.is_prefetch = 0; acc.is_hit = hit_g;
    acc.pc = va_t'(pc); acc.pa = pa_t'({ln, 6'd0});
    #1;
    while (!acc_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    acc_valid = 0;
    #1;
    // pair-wise prefetch group, if the access produced one
    if (pf_valid) begin
      line_t pl = pf_line[0];
      bit pm = pf_mask[0];
      pf_seen++;
      pf_ready = 1;
      @(negedge clk);
      pf_ready = 0;
      if (pm && find(0, pl) < 0) fill_garibaldi(pl, 0, 1);
    end
    // update the models
    if (hit_g) begin
      touch(0, set_of(ln), wg);
      ispf[0][set_of(ln)][wg] = 0;
      isi[0][set_of(ln)][wg] = inst;
    end else fill_garibaldi(ln, inst, 0);
    if (hit_l) touch(1, set_of(ln), wl);
    else fill_lru(ln, inst);
  endtask

  function automatic longint inst_pc(int i);
    return 64'h7f00_0000_0000 + longint'(i) * 4096 + longint'(i) % 64 * 64;
  endfunction
  function automatic line_t inst_line(int i);
    return line_t'({32'(32'h0002_0000 + i * 3), 6'(i % 64)});
  endfunction
  function automatic longint stream_pc(int c);
    return 64'h7f10_0000_0000 + longint'(c) * 4096;
  endfunction
  function automatic line_t stream_iline(int c);
    return line_t'({32'(32'h0003_0000 + c), 6'd0});
  endfunction

  // One scenario from reset. hot = 1: each instruction's data is one of the
  // NH hot lines. hot = 0: each instruction's data is a fresh, never reused
  // line (both sides of the pair are cold).
  task automatic run_scenario(input bit hot);
    bit hg, hl;
    int protect0, pf0;
    rst_n = 0;
    acc_valid = 0; acc = '0; vr_valid = 0; vr_is_inst = 0; vr_is_pf = 0; pf_ready = 0;
    foreach (vr_prio[i]) begin vr_prio[i] = 0; vr_line[i] = 0; end
    foreach (vld[m, s, w]) begin vld[m][s][w] = 0; age[m][s][w] = 0; tagm[m][s][w] = 0;
      isi[m][s][w] = 0; ispf[m][s][w] = 0; end
    im_g = 0; im_l = 0; i_acc = 0; pd_acc = 0; pd_hit_g = 0; pd_hit_l = 0;
    all_miss_g = 0; all_miss_l = 0; all_acc = 0;
    thr_min = 63; protect0 = 0; pf0 = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    for (int r = 0; r < ROUNDS; r++) begin
      automatic bit meas = (r >= ROUNDS / 2);
      if (r == ROUNDS / 2) begin protect0 = n_protect; pf0 = pf_seen; end
      // the streaming instructions are fetched once per round
      for (int c = 0; c < 2; c++) llc(c, 1, stream_pc(c), stream_iline(c), hg, hl);
      order.shuffle();
      for (int n = 0; n < NI; n++) begin
        automatic int i = order[n];
        automatic int c = i % 2;
        automatic line_t dl;
        if (hot) dl = line_t'(38'h0_0400_0000) + line_t'(32'(i / (NI / NH)));
        else begin dl = line_t'(64'h2000_0000 + sc); sc++; end
        llc(c, 1, inst_pc(i), inst_line(i), hg, hl);
        if (meas) begin i_acc++; im_g += int'(!hg); im_l += int'(!hl); end
        llc(c, 0, inst_pc(i) + 4, dl, hg, hl);
        if (meas) begin pd_acc++; pd_hit_g += int'(hg); pd_hit_l += int'(hl); end
        if (meas) begin all_acc += 2; all_miss_g += int'(!hg); all_miss_l += int'(!hl); end
        for (int k = 0; k < NS; k++) begin
          llc(c, 0, stream_pc(c) + 8, line_t'(64'h1000_0000 + sc), hg, hl);
          sc++;
          if (meas) begin all_acc++; all_miss_g += int'(!hg); all_miss_l += int'(!hl); end
        end
        if (int'(threshold) < thr_min) thr_min = int'(threshold);
      end
    end
    @(negedge clk);
    protect_meas = n_protect - protect0;
    pf_meas = pf_seen - pf0;
    if (hot) $display("hot pairs:");
    else     $display("cold pairs:");
    $display("  instruction misses : Garibaldi %0d, LRU %0d of %0d fetches", im_g, im_l, i_acc);
    $display("  paired data hits   : Garibaldi %0d, LRU %0d of %0d", pd_hit_g, pd_hit_l, pd_acc);
    $display("  all misses         : Garibaldi %0d, LRU %0d of %0d", all_miss_g, all_miss_l, all_acc);
    $display("  protections %0d, prefetches %0d in the second half; threshold min %0d",
             protect_meas, pf_meas, thr_min);
  endtask

  initial begin
    for (int i = 0; i < NI; i++) begin order[i] = i; hot_inst[inst_line(i)] = 1; end
    n_demote_checked = 0;
    sc = 0;
    pf_seen = 0;

    run_scenario(1);
    chk(im_l > i_acc * 6 / 10, "hot pairs: under LRU most instruction fetches miss");
    chk(im_g * 2 <= im_l, "hot pairs: Garibaldi at least halves the instruction misses");
    chk(pd_hit_g * 10 >= pd_acc * 9, "hot pairs: hot data keeps hitting with Garibaldi");
    chk(protect_meas > 0, "hot pairs: instruction lines are protected");
    chk(n_demote_checked > 0, "hot pairs: protected lines were checked");

    run_scenario(0);
    chk(protect_meas == 0, "cold pairs: nothing is protected");
    chk(im_g * 10 >= im_l * 9, "cold pairs: instruction misses as under LRU");
    chk(pf_meas * 10 >= im_g * 9, "cold pairs: unprotected instruction misses prefetch their data");

    $display("queries %0d, protections %0d, prefetches %0d, threshold falls %0d, rises %0d",
             n_query, n_protect, n_pf, n_dec, n_inc);
    chk(n_dec + n_inc > 0, "the threshold was adjusted");
    chk(n_query > 0 && n_pf == pf_seen, "queries occurred; every prefetch group was taken");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
