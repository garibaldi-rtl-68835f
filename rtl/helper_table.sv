// helper_table: per-core PC-page to instruction-page table kept in the LLC.
//
// When a core's instruction fetch reaches the LLC, the access carries both
// its PC (virtual) and the physical line address. The helper table records
// the page mapping PC_VPN -> I_PPN, much like an ITLB but private to the LLC
// so that it never disturbs the core's own translation. A later data access
// carries the PC of the instruction that caused it; looking that PC's page up
// here and appending the PC's in-page line offset gives the physical address
// of the triggering instruction line (IL_PA) without any help from the core.
//
// Organisation (from the paper): 128 entries, 4-way set associative, each with
// a VPN tag, a PPN, a valid bit and a 3-bit saturating counter used for
// replacement. Set index = low bits of the VPN; the tag is the rest of the VPN
// (31 bits for a 48-bit PC, where the paper's table lists 29 bits; the paper
// does not state its virtual address width).
// Replacement (this design's choice; the paper only names the counter): a hit
// by an update increments the counter; on a miss every valid way of the set is
// decremented and the new mapping goes to the first invalid way, or else to the
// way with the smallest counter, with counter SCTR_INIT.
//
// Lookup is combinational (lk_vpn -> lk_hit, lk_ppn). Update (up_en) writes at
// the clock edge. Only instruction accesses update the table.
module helper_table #(
  parameter int unsigned ENTRIES   = 128,
  parameter int unsigned WAYS      = 4,
  parameter int unsigned VPN_W     = 36,
  parameter int unsigned PPN_W     = 32,
  parameter int unsigned SCTR_W    = 3,
  parameter int unsigned SCTR_INIT = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  // lookup (data accesses)
  input  logic [VPN_W-1:0] lk_vpn,
  output logic             lk_hit,
  output logic [PPN_W-1:0] lk_ppn,
  // allocate / update (instruction accesses)
  input  logic             up_en,
  input  logic [VPN_W-1:0] up_vpn,
  input  logic [PPN_W-1:0] up_ppn,
  output logic             up_alloc     // the update allocated a new entry
);
  localparam int unsigned SETS  = ENTRIES / WAYS;
  localparam int unsigned SET_W = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned TAG_W = VPN_W - SET_W;
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;

  logic [TAG_W-1:0]  tag_q  [SETS][WAYS];
  logic [PPN_W-1:0]  ppn_q  [SETS][WAYS];
  logic [SCTR_W-1:0] sctr_q [SETS][WAYS];
  logic              vld_q  [SETS][WAYS];

  function automatic logic [SET_W-1:0] set_of(input logic [VPN_W-1:0] v);
    return (SETS > 1) ? v[SET_W-1:0] : '0;
  endfunction
  function automatic logic [TAG_W-1:0] tag_of(input logic [VPN_W-1:0] v);
    return v[VPN_W-1:VPN_W-TAG_W];
  endfunction

  // lookup
  logic [SET_W-1:0] lk_set;
  always_comb begin
    lk_set = set_of(lk_vpn);
    lk_hit = 1'b0;
    lk_ppn = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (!lk_hit && vld_q[lk_set][w] && tag_q[lk_set][w] == tag_of(lk_vpn)) begin
        lk_hit = 1'b1;
        lk_ppn = ppn_q[lk_set][w];
      end
    end
  end

  // update: hit way, or victim way
  logic [SET_W-1:0] up_set;
  logic             up_hit, have_inv;
  logic [WAY_W-1:0] hit_way, inv_way, min_way, vic_way;
  always_comb begin
    up_set   = set_of(up_vpn);
    up_hit   = 1'b0;
    have_inv = 1'b0;
    hit_way  = '0;
    inv_way  = '0;
    min_way  = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (!up_hit && vld_q[up_set][w] && tag_q[up_set][w] == tag_of(up_vpn)) begin
        up_hit  = 1'b1;
        hit_way = WAY_W'(w);
      end
      if (!have_inv && !vld_q[up_set][w]) begin
        have_inv = 1'b1;
        inv_way  = WAY_W'(w);
      end
      if (sctr_q[up_set][w] < sctr_q[up_set][min_way]) min_way = WAY_W'(w);
    end
    vic_way  = have_inv ? inv_way : min_way;
    up_alloc = up_en && !up_hit;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++) vld_q[s][w] <= 1'b0;
    end else if (up_en) begin
      if (up_hit) begin
        ppn_q[up_set][hit_way] <= up_ppn;
        if (sctr_q[up_set][hit_way] != '1)
          sctr_q[up_set][hit_way] <= sctr_q[up_set][hit_way] + 1'b1;
      end else begin
        for (int w = 0; w < WAYS; w++)
          if (vld_q[up_set][w] && sctr_q[up_set][w] != '0)
            sctr_q[up_set][w] <= sctr_q[up_set][w] - 1'b1;
        vld_q [up_set][vic_way] <= 1'b1;
        tag_q [up_set][vic_way] <= tag_of(up_vpn);
        ppn_q [up_set][vic_way] <= up_ppn;
        sctr_q[up_set][vic_way] <= SCTR_W'(SCTR_INIT);
      end
    end
  end
endmodule
