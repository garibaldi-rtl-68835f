// qbs_repl_unit: query-based victim selection for the LLC replacement unit.
//
// The base replacement policy (LRU, DRRIP, Hawkeye or Mockingjay) supplies an
// eviction priority per way of the set (5-bit ETR/RRPV; larger = evict
// sooner), together with each way's instruction indicator, a prefetched-line
// flag and the way's line address. The unit takes the way with the highest
// priority (lowest way on ties). If that candidate is an instruction line, or
// a prefetched line, and fewer than MAX_ATTEMPTS queries have been made, the
// pair table is queried with its line address. If the pair table protects it
// (aged miss cost > threshold), the way is marked in demote_mask, so that the
// LLC resets its priority to the lowest level, and the next candidate is
// tried. Once MAX_ATTEMPTS (2, as in the paper) queries have been made, the
// next candidate is evicted without a query, so a query never adds more than
// MAX_ATTEMPTS cycles.
//
// Handshake: req_valid/req_ready; the set's vectors are captured when the
// request is accepted. Each query goes out on q_valid/q_line and is answered by
// q_resp_valid/q_protect one cycle later (QBS lookup cost of one cycle).
// done pulses with victim_way and demote_mask. Latency from acceptance to done
// is 1 + (number of queries) cycles: 1, 2 or 3.
// Per-way vectors of the instruction bit come from the LLC tag array.
module qbs_repl_unit #(
  parameter int unsigned WAYS         = 12,
  parameter int unsigned PRIO_W       = 5,
  parameter int unsigned LINE_W       = 38,
  parameter int unsigned MAX_ATTEMPTS = 2,
  localparam int unsigned WAY_W       = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  output logic              req_ready,
  input  logic [PRIO_W-1:0] req_prio    [WAYS],
  input  logic [WAYS-1:0]   req_is_inst,
  input  logic [WAYS-1:0]   req_is_pf,
  input  logic [LINE_W-1:0] req_line    [WAYS],
  // pair table query
  output logic              q_valid,
  output logic [LINE_W-1:0] q_line,
  input  logic              q_resp_valid,
  input  logic              q_protect,
  // result
  output logic              done,
  output logic [WAY_W-1:0]  victim_way,
  output logic [WAYS-1:0]   demote_mask
);
  localparam int unsigned ATT_W = $clog2(MAX_ATTEMPTS + 1);

  typedef enum logic [1:0] {S_IDLE, S_SELECT, S_WAIT} state_e;
  state_e state;

  logic [PRIO_W-1:0] prio_q [WAYS];
  logic [WAYS-1:0]   inst_q, pf_q, excl_q;
  logic [LINE_W-1:0] line_q [WAYS];
  logic [WAY_W-1:0]  cand_q;
  logic [ATT_W-1:0]  att_q;

  // highest priority among the ways not excluded
  function automatic logic [WAY_W-1:0] pick(input logic [WAYS-1:0] excl,
                                            input logic [PRIO_W-1:0] p [WAYS]);
    logic             found;
    logic [WAY_W-1:0] best;
    found = 1'b0;
    best  = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (!excl[w] && (!found || p[w] > p[best])) begin
        found = 1'b1;
        best  = WAY_W'(w);
      end
    end
    return best;
  endfunction

  logic [WAYS-1:0]  excl_n;
  logic [WAY_W-1:0] cand_n;
  logic             need_q;

  always_comb begin
    excl_n = excl_q;
    if (state == S_WAIT && q_resp_valid && q_protect) excl_n[cand_q] = 1'b1;
    cand_n = pick(excl_n, prio_q);
    need_q = (inst_q[cand_n] || pf_q[cand_n]) && (att_q < ATT_W'(MAX_ATTEMPTS));
  end

  assign req_ready = (state == S_IDLE);

  always_comb begin
    q_valid     = 1'b0;
    q_line      = line_q[cand_n];
    done        = 1'b0;
    victim_way  = cand_n;
    demote_mask = excl_n;
    case (state)
      S_SELECT: begin
        if (need_q) q_valid = 1'b1;
        else        done    = 1'b1;
      end
      S_WAIT: if (q_resp_valid) begin
        if (!q_protect) begin
          done       = 1'b1;
          victim_way = cand_q;
        end else if (need_q) q_valid = 1'b1;
        else                 done    = 1'b1;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      excl_q <= '0;
      att_q  <= '0;
      cand_q <= '0;
    end else begin
      case (state)
        S_IDLE: if (req_valid) begin
          state  <= S_SELECT;
          excl_q <= '0;
          att_q  <= '0;
        end
        S_SELECT: begin
          if (need_q) begin
            state  <= S_WAIT;
            cand_q <= cand_n;
            att_q  <= att_q + 1'b1;
          end else state <= S_IDLE;
        end
        S_WAIT: if (q_resp_valid) begin
          excl_q <= excl_n;
          if (q_protect && need_q) begin
            cand_q <= cand_n;
            att_q  <= att_q + 1'b1;
          end else state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_IDLE && req_valid) begin
      prio_q <= req_prio;
      inst_q <= req_is_inst;
      pf_q   <= req_is_pf;
      line_q <= req_line;
    end
  end

`ifndef SYNTHESIS
  initial assert (WAYS > MAX_ATTEMPTS) else $error("WAYS must exceed MAX_ATTEMPTS");
  // a query is always answered in the next cycle
  a_q_resp: assert property (@(posedge clk) disable iff (!rst_n)
    q_valid |=> state == S_WAIT);
`endif
endmodule
