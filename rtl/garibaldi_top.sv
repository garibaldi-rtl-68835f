// garibaldi_top: the Garibaldi module that sits beside a shared LLC
// controller and manages instruction lines together with the data lines they
// lead to.
//
// The LLC's tag and metadata probe hands every access to this module (acc_*):
// requester core, instruction indicator, prefetch flag, hit/miss outcome, PC
// and physical address. The module keeps:
//   * one helper_table per core: recorded on instruction accesses
//     (PC page -> instruction page) and read by data accesses to rebuild the
//     instruction line address IL_PA = {I_PPN, PC[11:6]} of the triggering
//     instruction;
//   * the pair_table (with its D_PPN table): each demand data access whose
//     IL_PA was found updates that instruction line's miss cost (+1 on an LLC
//     data hit, -1 on a miss) and its DL_PA fields; an instruction miss on a
//     tracked, unprotected line produces a pair-wise prefetch of the recorded
//     data lines (pf_*);
//   * perf_counter and threshold_unit: P(D_miss|I_miss) against the LLC miss
//     rate sets the protection threshold once per colour period;
//   * qbs_repl_unit: the LLC replacement unit asks it for a victim (vr_*),
//     giving the base policy's per-way priorities; instruction (and
//     prefetched) candidates are checked against the pair table and protected
//     lines are demoted instead of evicted.
// Prefetched data accesses do not update the pair table; prefetched
// instruction accesses record the helper table like demand ones.
//
// Interface timing: acc_valid/acc_ready, one access per cycle (ready is low
// while a prefetch group waits on pf_ready). Victim selection answers in 1 to
// 1 + MAX_ATTEMPTS cycles. Parameters default to the evaluated configuration:
// 40 cores, 16384-entry pair table with k = 1, 8192-entry D_PPN table,
// 128-entry 4-way helper tables, 3-bit colour, 100K-access periods, 12 ways.
module garibaldi_top
  import garibaldi_pkg::*;
#(
  parameter int unsigned NUM_CORES    = 40,
  parameter int unsigned HT_ENTRIES   = 128,
  parameter int unsigned HT_WAYS      = 4,
  parameter int unsigned PT_ENTRIES   = 16384,
  parameter int unsigned K            = 1,
  parameter int unsigned DPPN_ENTRIES = 8192,
  parameter int unsigned COST_W       = 6,
  parameter int unsigned COLOR_BITS   = 3,
  parameter int unsigned PERIOD       = 100000,
  parameter int unsigned THR_INIT     = 32,
  parameter int unsigned PMU_PCS      = 10,
  parameter int unsigned WAYS         = 12,
  parameter int unsigned PRIO_W       = 5,
  parameter int unsigned MAX_ATTEMPTS = 2,
  localparam int unsigned WAY_W       = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // LLC accesses
  input  logic                  acc_valid,
  output logic                  acc_ready,
  input  llc_access_t           acc,
  // victim selection for the LLC replacement unit
  input  logic                  vr_valid,
  output logic                  vr_ready,
  input  logic [PRIO_W-1:0]     vr_prio    [WAYS],
  input  logic [WAYS-1:0]       vr_is_inst,
  input  logic [WAYS-1:0]       vr_is_pf,
  input  line_t                 vr_line    [WAYS],
  output logic                  vr_done,
  output logic [WAY_W-1:0]      vr_victim,
  output logic [WAYS-1:0]       vr_demote,
  // pair-wise prefetch requests to the LLC's prefetch queue
  output logic                  pf_valid,
  input  logic                  pf_ready,
  output logic [K-1:0]          pf_mask,
  output line_t                 pf_line    [K],
  // status
  output logic [COST_W-1:0]     threshold,
  output logic [COLOR_BITS-1:0] color,
  output gar_events_t           events
);
  localparam int unsigned CID_W = (NUM_CORES > 1) ? $clog2(NUM_CORES) : 1;

  logic       fire;
  logic [CID_W-1:0] cid;
  vpn_t       pc_vpn;
  ppn_t       acc_ppn;
  assign cid     = CID_W'(acc.core);
  assign pc_vpn  = acc.pc[VA_W-1:PAGE_OFF];
  assign acc_ppn = acc.pa[PA_W-1:PAGE_OFF];

  // ---------------------------------------------------------- helper tables
  logic             ht_hit   [NUM_CORES];
  ppn_t             ht_ppn   [NUM_CORES];
  logic             ht_alloc [NUM_CORES];
  logic             ht_sel_hit;
  ppn_t             ht_sel_ppn;

  for (genvar c = 0; c < NUM_CORES; c++) begin : g_ht
    helper_table #(.ENTRIES(HT_ENTRIES), .WAYS(HT_WAYS), .VPN_W(VPN_W), .PPN_W(PPN_W)) u_ht (
      .clk, .rst_n,
      .lk_vpn(pc_vpn), .lk_hit(ht_hit[c]), .lk_ppn(ht_ppn[c]),
      .up_en(fire && acc.is_inst && cid == CID_W'(c)),
      .up_vpn(pc_vpn), .up_ppn(acc_ppn), .up_alloc(ht_alloc[c]));
  end

  always_comb begin
    ht_sel_hit = ht_hit[cid];
    ht_sel_ppn = ht_ppn[cid];
  end

  // ------------------------------------------------------------- pair table
  logic  pt_valid, pt_ready;
  line_t il_line, dl_line;
  logic  q_valid, q_resp_valid, q_protect;
  line_t q_line;
  logic  ev_alloc, ev_replace, ev_update, ev_preserve, ev_record, ev_field_hit, ev_pf;

  assign il_line  = acc.is_inst ? acc.pa[PA_W-1:LINE_OFF]
                                : {ht_sel_ppn, acc.pc[PAGE_OFF-1:LINE_OFF]};
  assign dl_line  = acc.pa[PA_W-1:LINE_OFF];
  // instruction accesses go to the pair table only when they miss; data
  // accesses only when demand and paired through the helper table
  assign pt_valid = acc_valid && (acc.is_inst ? !acc.is_hit
                                              : (!acc.is_prefetch && ht_sel_hit));
  assign acc_ready = pt_ready;
  assign fire      = acc_valid && acc_ready;

  pair_table #(.ENTRIES(PT_ENTRIES), .K(K), .DPPN_ENTRIES(DPPN_ENTRIES), .LINE_W(LINE_W),
               .PFO_W(PFO_W), .COST_W(COST_W), .COLOR_BITS(COLOR_BITS)) u_pt (
    .clk, .rst_n,
    .in_valid(pt_valid), .in_ready(pt_ready), .in_is_inst(acc.is_inst), .in_hit(acc.is_hit),
    .in_il_line(il_line), .in_dl_line(dl_line),
    .threshold(threshold), .cur_color(color),
    .q_valid(q_valid), .q_line(q_line), .q_resp_valid(q_resp_valid), .q_protect(q_protect),
    .pf_valid(pf_valid), .pf_ready(pf_ready), .pf_mask(pf_mask), .pf_line(pf_line),
    .ev_alloc(ev_alloc), .ev_replace(ev_replace), .ev_update(ev_update),
    .ev_preserve(ev_preserve), .ev_record(ev_record), .ev_field_hit(ev_field_hit),
    .ev_pf(ev_pf));

  // ------------------------------------------------- PMU and threshold unit
  localparam int unsigned CNT_W = 32;
  logic [CNT_W-1:0] cond_total, cond_miss, llc_acc, llc_miss;
  logic             period_end, thr_inc, thr_dec;

  perf_counter #(.NUM_CORES(NUM_CORES), .PCS_PER_CORE(PMU_PCS), .PCL_W(PCL_W),
                 .CNT_W(CNT_W)) u_pmu (
    .clk, .rst_n,
    .acc_valid(fire && !acc.is_prefetch), .acc_core(cid), .acc_is_inst(acc.is_inst),
    .acc_hit(acc.is_hit), .acc_pcl(acc.pc[VA_W-1:LINE_OFF]),
    .clear(period_end),
    .cond_total, .cond_miss, .llc_acc, .llc_miss);

  threshold_unit #(.COLOR_BITS(COLOR_BITS), .PERIOD(PERIOD), .COST_W(COST_W),
                   .THR_INIT(THR_INIT), .CNT_W(CNT_W)) u_thr (
    .clk, .rst_n,
    .acc_valid(fire),
    .cond_total, .cond_miss, .llc_acc, .llc_miss,
    .period_end, .threshold, .color, .thr_inc, .thr_dec);

  // ------------------------------------------------- replacement unit (QBS)
  qbs_repl_unit #(.WAYS(WAYS), .PRIO_W(PRIO_W), .LINE_W(LINE_W),
                  .MAX_ATTEMPTS(MAX_ATTEMPTS)) u_qbs (
    .clk, .rst_n,
    .req_valid(vr_valid), .req_ready(vr_ready), .req_prio(vr_prio),
    .req_is_inst(vr_is_inst), .req_is_pf(vr_is_pf), .req_line(vr_line),
    .q_valid(q_valid), .q_line(q_line), .q_resp_valid(q_resp_valid), .q_protect(q_protect),
    .done(vr_done), .victim_way(vr_victim), .demote_mask(vr_demote));

  // ----------------------------------------------------------------- events
  always_comb begin
    events = '0;
    events.ht_alloc     = fire && acc.is_inst && ht_alloc[cid];
    events.ht_miss      = fire && !acc.is_inst && !acc.is_prefetch && !ht_sel_hit;
    events.pt_alloc     = ev_alloc;
    events.pt_replace   = ev_replace;
    events.pt_update    = ev_update;
    events.pt_preserve  = ev_preserve;
    events.pt_record    = ev_record;
    events.pt_field_hit = ev_field_hit;
    events.pf_issue     = ev_pf;
    events.qbs_query    = q_valid;
    events.qbs_protect  = q_resp_valid && q_protect;
    events.thr_inc      = thr_inc;
    events.thr_dec      = thr_dec;
    events.period_end   = period_end;
  end
endmodule
