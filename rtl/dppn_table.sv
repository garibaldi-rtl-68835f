// dppn_table: decoupled table of data page frame numbers (D_PPN).
//
// A DL_PA field in the pair table keeps only the line-in-page offset of a data
// line and an index into this table, which holds the rest of the data page
// number. The table is tagless and direct mapped: the index is the low IDX_W
// bits of the page number (the paper calls it a hashed index without giving
// the hash; taking the low bits is this design's choice) and the entry stores
// the remaining PPN_W-IDX_W bits, a valid bit and a 3-bit saturating counter.
//
// Record port (rec_en): the entry at the page's index is reinforced when it
// already holds the page (counter +1), filled when invalid, and otherwise
// weakened (counter -1); when the counter would fall below SCTR_THR the entry
// is replaced by the new page with counter SCTR_INIT. The same rules as the
// DL_PA field counters, without an old bit, as the paper states.
// rec_match / rec_will_hold are combinational and tell the caller whether the
// entry holds the page now / will hold it after this cycle's write.
//
// NRD combinational read ports rebuild full page numbers from indices, for
// pair-wise prefetch. Reads are asynchronous; the write happens at the clock
// edge, so a read in the cycle of a record returns the old contents.
// rec_idx and the low IDX_W bits of each rd_ppn are wired straight from the
// page number and the index: in a tagless table indexed by the low page bits
// they are the same bits, and only the upper bits are stored.
module dppn_table #(
  parameter int unsigned ENTRIES   = 8192,
  parameter int unsigned PPN_W     = 32,
  parameter int unsigned SCTR_W    = 3,
  parameter int unsigned SCTR_THR  = 4,
  parameter int unsigned SCTR_INIT = 4,
  parameter int unsigned NRD       = 1,
  localparam int unsigned IDX_W    = $clog2(ENTRIES)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // record
  input  logic                 rec_en,
  input  logic [PPN_W-1:0]     rec_ppn,
  output logic [IDX_W-1:0]     rec_idx,
  output logic                 rec_match,
  output logic                 rec_will_hold,
  // read
  input  logic [IDX_W-1:0]     rd_idx   [NRD],
  output logic                 rd_valid [NRD],
  output logic [PPN_W-1:0]     rd_ppn   [NRD]
);
  localparam int unsigned HI_W = PPN_W - IDX_W;

  typedef struct packed {
    logic              valid;
    logic [HI_W-1:0]   hi;
    logic [SCTR_W-1:0] sctr;
  } dppn_entry_t;

  dppn_entry_t mem [ENTRIES];
  logic [ENTRIES-1:0] valid_q;   // kept apart so that reset only clears flops

  dppn_entry_t cur, nxt;
  logic [HI_W-1:0] rec_hi;
  logic [SCTR_W:0] dec;

  always_comb begin
    rec_idx = rec_ppn[IDX_W-1:0];
    rec_hi  = rec_ppn[PPN_W-1:IDX_W];
    cur     = mem[rec_idx];
    cur.valid = valid_q[rec_idx];
    rec_match = cur.valid && (cur.hi == rec_hi);
    nxt = cur;
    dec = {1'b0, cur.sctr} - 1'b1;
    rec_will_hold = 1'b1;
    if (!cur.valid) begin
      nxt = '{valid: 1'b1, hi: rec_hi, sctr: SCTR_W'(SCTR_INIT)};
    end else if (rec_match) begin
      if (cur.sctr != '1) nxt.sctr = cur.sctr + 1'b1;
    end else begin
      if (cur.sctr == '0 || dec < (SCTR_W+1)'(SCTR_THR)) begin
        nxt = '{valid: 1'b1, hi: rec_hi, sctr: SCTR_W'(SCTR_INIT)};
      end else begin
        nxt.sctr = dec[SCTR_W-1:0];
        rec_will_hold = 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rec_en) mem[rec_idx] <= nxt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      valid_q <= '0;
    else if (rec_en) valid_q[rec_idx] <= 1'b1;
  end

  always_comb begin
    for (int i = 0; i < NRD; i++) begin
      rd_valid[i] = valid_q[rd_idx[i]];
      rd_ppn[i]   = {mem[rd_idx[i]].hi, rd_idx[i]};
    end
  end
endmodule
