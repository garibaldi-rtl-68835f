// perf_counter: performance counters that measure P(D_miss | I_miss) and the
// LLC miss rate over one colour period.
//
// Each core (one thread per core) has a small list of the 64 B-aligned PCs of
// its most recent instruction misses in the LLC (PCS_PER_CORE = 10, as in the
// paper). An instruction miss whose aligned PC is not yet listed is shifted
// in, pushing out the oldest. A data access whose aligned PC is listed for its
// core counts into cond_total, and also into cond_miss if it missed. Every
// demand access counts into llc_acc, and into llc_miss if it missed.
// P(D_miss | I_miss) = cond_miss / cond_total is compared against
// llc_miss / llc_acc by the threshold unit.
//
// clear (one cycle, at the end of a period) restarts all four counters; an
// access in the same cycle is the first one of the new period. The PC lists
// are kept across periods. Skipping PCs already in the list, keeping the lists
// across periods and leaving prefetches out of the counts are this design's
// choices. Counters saturate.
module perf_counter #(
  parameter int unsigned NUM_CORES    = 40,
  parameter int unsigned PCS_PER_CORE = 10,
  parameter int unsigned PCL_W        = 42,   // 64 B-aligned PC bits
  parameter int unsigned CNT_W        = 32,
  localparam int unsigned CID_W       = (NUM_CORES > 1) ? $clog2(NUM_CORES) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             acc_valid,     // one demand LLC access this cycle
  input  logic [CID_W-1:0] acc_core,
  input  logic             acc_is_inst,
  input  logic             acc_hit,
  input  logic [PCL_W-1:0] acc_pcl,
  input  logic             clear,
  output logic [CNT_W-1:0] cond_total,
  output logic [CNT_W-1:0] cond_miss,
  output logic [CNT_W-1:0] llc_acc,
  output logic [CNT_W-1:0] llc_miss
);
  logic [PCL_W-1:0] pcs   [NUM_CORES][PCS_PER_CORE];
  logic             pcs_v [NUM_CORES][PCS_PER_CORE];

  logic listed;
  always_comb begin
    listed = 1'b0;
    for (int i = 0; i < PCS_PER_CORE; i++)
      if (pcs_v[acc_core][i] && pcs[acc_core][i] == acc_pcl) listed = 1'b1;
  end

  logic push;
  assign push = acc_valid && acc_is_inst && !acc_hit && !listed;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < NUM_CORES; c++)
        for (int i = 0; i < PCS_PER_CORE; i++) pcs_v[c][i] <= 1'b0;
    end else if (push) begin
      for (int i = PCS_PER_CORE-1; i > 0; i--) pcs_v[acc_core][i] <= pcs_v[acc_core][i-1];
      pcs_v[acc_core][0] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (push) begin
      for (int i = PCS_PER_CORE-1; i > 0; i--) pcs[acc_core][i] <= pcs[acc_core][i-1];
      pcs[acc_core][0] <= acc_pcl;
    end
  end

  logic inc_ct, inc_cm, inc_la, inc_lm;
  assign inc_la = acc_valid;
  assign inc_lm = acc_valid && !acc_hit;
  assign inc_ct = acc_valid && !acc_is_inst && listed;
  assign inc_cm = inc_ct && !acc_hit;

  function automatic logic [CNT_W-1:0] bump(input logic [CNT_W-1:0] c, input logic inc,
                                            input logic clr);
    if (clr)                 return CNT_W'(inc);
    else if (inc && c != '1) return c + 1'b1;
    else                     return c;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cond_total <= '0;
      cond_miss  <= '0;
      llc_acc    <= '0;
      llc_miss   <= '0;
    end else begin
      cond_total <= bump(cond_total, inc_ct, clear);
      cond_miss  <= bump(cond_miss,  inc_cm, clear);
      llc_acc    <= bump(llc_acc,    inc_la, clear);
      llc_miss   <= bump(llc_miss,   inc_lm, clear);
    end
  end
endmodule
