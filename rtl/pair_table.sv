// pair_table: the main instruction-data pair table with its D_PPN table.
//
// One direct-mapped entry per instruction line (IL_PA). The entry holds the
// IL_PA tag, a 6-bit miss cost, the colour at which it was last written, a
// valid bit, and K DL_PA fields. A DL_PA field names one data line that
// followed the instruction line: its line-in-page offset (D_PFO), an index
// into the D_PPN table for the page, an old bit and a 3-bit counter (sctr).
// All field widths, K = 1 and 16384 entries are the paper's configuration.
//
// Operations, one per accepted request (in_valid && in_ready), done in the
// cycle of acceptance (asynchronous array read, write at the clock edge):
//  * DATA access (a demand data access whose IL_PA the helper table found):
//    - entry hit: miss cost <- aged cost +1 if the data access hit in the LLC,
//      -1 if it missed (saturating); colour <- current colour. If the colour
//      changed, all old bits are set. Then, only if some old bit is set, the
//      DL_PA fields are managed: a field that matches the data line gets
//      sctr+1 and its old bit cleared; otherwise the first field with its old
//      bit set has it cleared and sctr-1, and is overwritten with the data line
//      (sctr <- SCTR_INIT) once sctr would fall below SCTR_THR.
//    - entry miss: an invalid entry, or a valid one whose aged cost is not
//      above the threshold, is replaced by a new entry (cost COST_INIT +/-1,
//      field 0 = this data line). A colliding entry whose aged cost is above
//      the threshold is preserved: its cost is written back aged and its colour
//      made current.
//  * INST access that missed in the LLC: if the entry matches, all old bits
//    are set (the next K data lines are recorded), and, if the aged cost is
//    not above the threshold (the line was not protected), the recorded data
//    lines are sent out as one pair-wise prefetch group (pf_valid/pf_mask/
//    pf_line, held until pf_ready). New requests wait while a group is held.
//  * Query port (replacement unit): q_line is looked up; one cycle later
//    q_resp_valid pulses with q_protect = entry matches && aged cost >
//    threshold. Queries never write the table (as in the paper).
// Choices of this design where the paper is silent: COST_INIT = 0, sctr of a
// freshly written field = SCTR_INIT = 4 (equal to the replacement threshold),
// an empty field is one with sctr = 0 (a live field never drops below
// SCTR_THR), a field is only overwritten when the D_PPN table will hold its
// page, and the D_PPN table is recorded only when fields are managed or an
// entry is allocated.
module pair_table #(
  parameter int unsigned ENTRIES      = 16384,
  parameter int unsigned K            = 1,
  parameter int unsigned DPPN_ENTRIES = 8192,
  parameter int unsigned LINE_W       = 38,
  parameter int unsigned PFO_W        = 6,
  parameter int unsigned COST_W       = 6,
  parameter int unsigned COLOR_BITS   = 3,
  parameter int unsigned SCTR_W       = 3,
  parameter int unsigned SCTR_THR     = 4,
  parameter int unsigned SCTR_INIT    = 4,
  parameter int unsigned COST_INIT    = 0
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // access
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic                  in_is_inst,
  input  logic                  in_hit,
  input  logic [LINE_W-1:0]     in_il_line,
  input  logic [LINE_W-1:0]     in_dl_line,
  // dynamic management
  input  logic [COST_W-1:0]     threshold,
  input  logic [COLOR_BITS-1:0] cur_color,
  // query (replacement unit)
  input  logic                  q_valid,
  input  logic [LINE_W-1:0]     q_line,
  output logic                  q_resp_valid,
  output logic                  q_protect,
  // pair-wise prefetch
  output logic                  pf_valid,
  input  logic                  pf_ready,
  output logic [K-1:0]          pf_mask,
  output logic [LINE_W-1:0]     pf_line [K],
  // events
  output logic                  ev_alloc,
  output logic                  ev_replace,
  output logic                  ev_update,
  output logic                  ev_preserve,
  output logic                  ev_record,
  output logic                  ev_field_hit,
  output logic                  ev_pf
);
  localparam int unsigned IDX_W  = $clog2(ENTRIES);
  localparam int unsigned TAG_W  = LINE_W - IDX_W;
  localparam int unsigned DIDX_W = $clog2(DPPN_ENTRIES);
  localparam int unsigned PPN_W  = LINE_W - PFO_W;
  localparam int unsigned KI_W   = (K > 1) ? $clog2(K) : 1;

  typedef struct packed {
    logic [PFO_W-1:0]  pfo;
    logic [DIDX_W-1:0] didx;
    logic              old;
    logic [SCTR_W-1:0] sctr;
  } dl_field_t;

  typedef struct packed {
    logic [TAG_W-1:0]      tag;
    logic [COST_W-1:0]     cost;
    logic [COLOR_BITS-1:0] color;
    dl_field_t [K-1:0]     fld;
  } pt_entry_t;

  pt_entry_t          mem [ENTRIES];
  logic [ENTRIES-1:0] valid_q;

  // ------------------------------------------------------------ access path
  logic              fire;
  logic [IDX_W-1:0]  idx;
  logic [TAG_W-1:0]  tag;
  pt_entry_t         e, ne;
  logic              e_valid, e_hit;
  logic [COST_W-1:0] aged;
  logic              above;
  logic              we;

  assign in_ready = !pf_valid;
  assign fire     = in_valid && in_ready;
  assign idx      = in_il_line[IDX_W-1:0];
  assign tag      = in_il_line[LINE_W-1:IDX_W];
  assign e        = mem[idx];
  assign e_valid  = valid_q[idx];
  assign e_hit    = e_valid && (e.tag == tag);

  miss_cost_aging #(.COST_W(COST_W), .COLOR_BITS(COLOR_BITS)) u_age_acc (
    .cost(e.cost), .last_color(e.color), .cur_color(cur_color),
    .threshold(threshold), .aged_cost(aged), .protect(above));

  // data line split into page and offset
  logic [PPN_W-1:0]  dl_ppn;
  logic [PFO_W-1:0]  dl_pfo;
  assign dl_ppn = in_dl_line[LINE_W-1:PFO_W];
  assign dl_pfo = in_dl_line[PFO_W-1:0];

  // D_PPN table
  logic              d_rec_en;
  logic [DIDX_W-1:0] d_rec_idx;
  logic              d_match, d_will_hold;
  logic [DIDX_W-1:0] d_rd_idx   [K];
  logic              d_rd_valid [K];
  logic [PPN_W-1:0]  d_rd_ppn   [K];

  dppn_table #(.ENTRIES(DPPN_ENTRIES), .PPN_W(PPN_W), .SCTR_W(SCTR_W),
               .SCTR_THR(SCTR_THR), .SCTR_INIT(SCTR_INIT), .NRD(K)) u_dppn (
    .clk, .rst_n,
    .rec_en(d_rec_en), .rec_ppn(dl_ppn), .rec_idx(d_rec_idx),
    .rec_match(d_match), .rec_will_hold(d_will_hold),
    .rd_idx(d_rd_idx), .rd_valid(d_rd_valid), .rd_ppn(d_rd_ppn));

  always_comb begin
    for (int j = 0; j < K; j++) d_rd_idx[j] = e.fld[j].didx;
  end

  // next-entry computation
  logic          any_old, f_match, f_old_found;
  logic [KI_W-1:0] f_idx, o_idx;
  logic [SCTR_W:0] sdec;
  logic          pf_fire_now;
  logic [K-1:0]  pf_mask_d;
  logic [LINE_W-1:0] pf_line_d [K];

  function automatic logic [COST_W-1:0] cost_step(input logic [COST_W-1:0] c, input logic up);
    if (up) return (c == '1) ? c : c + 1'b1;
    else    return (c == '0) ? c : c - 1'b1;
  endfunction

  always_comb begin
    ne           = e;
    we           = 1'b0;
    d_rec_en     = 1'b0;
    ev_alloc     = 1'b0;
    ev_replace   = 1'b0;
    ev_update    = 1'b0;
    ev_preserve  = 1'b0;
    ev_record    = 1'b0;
    ev_field_hit = 1'b0;
    pf_fire_now  = 1'b0;
    any_old      = 1'b0;
    f_match      = 1'b0;
    f_old_found  = 1'b0;
    f_idx        = '0;
    o_idx        = '0;
    sdec         = '0;
    for (int j = 0; j < K; j++) begin
      pf_mask_d[j] = (e.fld[j].sctr != '0) && d_rd_valid[j];
      pf_line_d[j] = {d_rd_ppn[j], e.fld[j].pfo};
    end

    if (fire && !in_is_inst) begin
      we = 1'b1;
      if (e_hit) begin
        // ---- update
        ev_update = 1'b1;
        ne.cost   = cost_step(aged, in_hit);
        ne.color  = cur_color;
        if (e.color != cur_color)
          for (int j = 0; j < K; j++) ne.fld[j].old = 1'b1;
        for (int j = 0; j < K; j++) any_old |= ne.fld[j].old;
        if (any_old) begin
          d_rec_en = 1'b1;
          for (int j = 0; j < K; j++) begin
            if (!f_match && ne.fld[j].sctr != '0 && ne.fld[j].pfo == dl_pfo &&
                ne.fld[j].didx == d_rec_idx && d_match) begin
              f_match = 1'b1;
              f_idx   = KI_W'(j);
            end
            if (!f_old_found && ne.fld[j].old) begin
              f_old_found = 1'b1;
              o_idx       = KI_W'(j);
            end
          end
          if (f_match) begin
            ev_field_hit = 1'b1;
            ne.fld[f_idx].old = 1'b0;
            if (ne.fld[f_idx].sctr != '1) ne.fld[f_idx].sctr = ne.fld[f_idx].sctr + 1'b1;
          end else begin
            ne.fld[o_idx].old = 1'b0;
            sdec = (ne.fld[o_idx].sctr == '0) ? '0 : {1'b0, ne.fld[o_idx].sctr} - 1'b1;
            ne.fld[o_idx].sctr = sdec[SCTR_W-1:0];
            if (sdec < (SCTR_W+1)'(SCTR_THR) && d_will_hold) begin
              ev_record = 1'b1;
              ne.fld[o_idx] = '{pfo: dl_pfo, didx: d_rec_idx, old: 1'b0,
                                sctr: SCTR_W'(SCTR_INIT)};
            end
          end
        end
      end else if (e_valid && above) begin
        // ---- collision, entry preserved with its aged cost
        ev_preserve = 1'b1;
        ne.cost  = aged;
        ne.color = cur_color;
        if (e.color != cur_color)
          for (int j = 0; j < K; j++) ne.fld[j].old = 1'b1;
      end else begin
        // ---- allocate (replace)
        ev_alloc   = 1'b1;
        ev_replace = e_valid;
        d_rec_en   = 1'b1;
        ne.tag     = tag;
        ne.cost    = cost_step(COST_W'(COST_INIT), in_hit);
        ne.color   = cur_color;
        for (int j = 0; j < K; j++) ne.fld[j] = '{pfo: '0, didx: '0, old: 1'b1, sctr: '0};
        if (d_will_hold) begin
          ev_record = 1'b1;
          ne.fld[0] = '{pfo: dl_pfo, didx: d_rec_idx, old: 1'b0, sctr: SCTR_W'(SCTR_INIT)};
        end
      end
    end else if (fire && in_is_inst && !in_hit && e_hit) begin
      // ---- instruction miss on a tracked line
      we = 1'b1;
      for (int j = 0; j < K; j++) ne.fld[j].old = 1'b1;
      pf_fire_now = !above && (|pf_mask_d);
    end
  end

  always_ff @(posedge clk) begin
    if (we) mem[idx] <= ne;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                         valid_q <= '0;
    else if (fire && !in_is_inst && !e_hit && !(e_valid && above))
                                        valid_q[idx] <= 1'b1;
  end

  // ------------------------------------------------------- prefetch output
  assign ev_pf = pf_fire_now;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pf_valid <= 1'b0;
      pf_mask  <= '0;
    end else if (pf_fire_now) begin
      pf_valid <= 1'b1;
      pf_mask  <= pf_mask_d;
    end else if (pf_ready) begin
      pf_valid <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (pf_fire_now) pf_line <= pf_line_d;
  end

  // ---------------------------------------------------------- query port
  logic [IDX_W-1:0]  q_idx;
  pt_entry_t         qe;
  logic              q_hit, q_above;
  logic [COST_W-1:0] q_aged;

  assign q_idx = q_line[IDX_W-1:0];
  assign qe    = mem[q_idx];
  assign q_hit = valid_q[q_idx] && (qe.tag == q_line[LINE_W-1:IDX_W]);

  miss_cost_aging #(.COST_W(COST_W), .COLOR_BITS(COLOR_BITS)) u_age_q (
    .cost(qe.cost), .last_color(qe.color), .cur_color(cur_color),
    .threshold(threshold), .aged_cost(q_aged), .protect(q_above));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_resp_valid <= 1'b0;
      q_protect    <= 1'b0;
    end else begin
      q_resp_valid <= q_valid;
      q_protect    <= q_valid && q_hit && q_above;
    end
  end

`ifndef SYNTHESIS
  // a prefetch group is held stable until taken
  a_pf_hold: assert property (@(posedge clk) disable iff (!rst_n)
    pf_valid && !pf_ready |=> pf_valid && $stable(pf_mask));
`endif
endmodule
