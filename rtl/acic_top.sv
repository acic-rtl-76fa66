// acic_top: Admission-Controlled Instruction Cache.
//
// The L1 instruction side is split in two. A 16-entry i-Filter catches the
// burst of accesses a block receives right after it is fetched (successive
// instructions in one 64-byte block, nearby branch targets); the 32KB
// i-cache is meant to keep blocks that will be needed again after their
// burst is over. A block missed in both is fetched from L2 into the
// i-Filter only. When the i-Filter must make room, its LRU block (the
// victim) is not simply pushed into the i-cache, where it may evict a more
// useful block: a two-level predictor, indexed by a hash of the victim's
// partial tag, decides whether it replaces the i-cache set's LRU block (its
// contender) or is thrown away. Every contest is recorded in the CSHR; the
// next fetch of either block settles it and trains the predictor.
//
// Operation, one fetch at a time:
//   IDLE      fetch accepted; i-Filter and i-cache looked up in parallel,
//             CSHR searched with the block's partial tag (training requests
//             go to the predictor the same cycle).
//   HIT       hit in either: the block is returned ICACHE_LAT cycles after
//             acceptance (4 cycles, the L1 latency of the evaluated core).
//   L2_REQ /  miss: request to L2 (valid/ready), wait for the block.
//   L2_WAIT
//   FILL      block written into the i-Filter. If that displaces a victim:
//             the contender of the victim's i-cache set is read; if the
//             set has an empty way the victim simply takes it; otherwise
//             <victim, contender> partial tags go into the CSHR and the
//             victim replaces the contender only if the predictor says so.
//   RESP      block returned (resp_valid for one cycle).
// Ports: fetch_* from the fetch unit (block addresses), resp_* back to it,
// l2_* to the next level, events: one-cycle pulses of the mechanisms.
// Follows ACIC: the datapath of Fig. 3 with admission control, CSHR
// search and training. Choices of this design: a blocking, one-at-a-time
// controller (no MSHRs, no prefetcher port), no backpressure on resp, and
// empty i-cache ways filled without a contest.
module acic_top
  import acic_pkg::*;
#(
  parameter int unsigned ICACHE_LAT = IC_LAT
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         fetch_valid,
  output logic         fetch_ready,
  input  baddr_t       fetch_baddr,
  output logic         resp_valid,
  output baddr_t       resp_baddr,
  output block_t       resp_data,
  output logic         l2_req_valid,
  input  logic         l2_req_ready,
  output baddr_t       l2_req_baddr,
  input  logic         l2_resp_valid,
  input  block_t       l2_resp_data,
  output acic_events_t events
);
  typedef enum logic [2:0] {S_IDLE, S_HIT, S_L2_REQ, S_L2_WAIT, S_FILL, S_RESP} state_t;

  state_t  state_q;
  baddr_t  addr_q;
  block_t  data_q;
  logic [$clog2(ICACHE_LAT+1)-1:0] wait_q;

  logic    accept;
  logic    if_hit, ic_hit;
  block_t  if_data, ic_data;
  logic    fill_en;
  logic    vic_valid;
  baddr_t  vic_baddr;
  block_t  vic_data;
  logic    cont_valid;
  logic [IC_TAG_W-1:0] cont_tag;
  logic    pr_admit;
  logic    ic_ins, cshr_ins;
  upd_req_t req [NREQ];
  logic    c_vhit, c_chit, c_evict;

  assign fetch_ready = (state_q == S_IDLE);
  assign accept      = fetch_valid && fetch_ready;
  assign fill_en     = (state_q == S_FILL);

  ifilter u_ifilter (
    .clk, .rst_n,
    .lk_en(accept), .lk_tag(fetch_baddr), .lk_hit(if_hit), .lk_data(if_data),
    .fill_en, .fill_tag(addr_q), .fill_data(data_q),
    .victim_valid(vic_valid), .victim_tag(vic_baddr), .victim_data(vic_data)
  );

  icache u_icache (
    .clk, .rst_n,
    .lk_en(accept), .lk_baddr(fetch_baddr), .lk_hit(ic_hit), .lk_data(ic_data),
    .cq_baddr(vic_baddr), .cont_valid, .cont_tag,
    .ins_en(ic_ins), .ins_data(vic_data)
  );

  // Admission decision for the victim of this fill
  always_comb begin
    ic_ins   = 1'b0;
    cshr_ins = 1'b0;
    if (fill_en && vic_valid) begin
      if (!cont_valid) begin
        ic_ins = 1'b1;
      end else begin
        cshr_ins = 1'b1;
        ic_ins   = pr_admit;
      end
    end
  end

  cshr u_cshr (
    .clk, .rst_n,
    .srch_en(accept), .srch_set(cshr_set(fetch_baddr)), .srch_ptag(ptag(fetch_baddr)),
    .ins_en(cshr_ins), .ins_set(cshr_set(vic_baddr)), .ins_vtag(ptag(vic_baddr)),
    .ins_ctag(cont_tag[PTAG_W-1:0]),
    .req, .victim_hit(c_vhit), .contender_hit(c_chit), .evict_unresolved(c_evict)
  );

  logic [HIST_W-1:0] unused_hist;
  logic [CTR_W-1:0]  unused_ctr;
  logic ev_ptu, ev_alias, ev_wait, ev_drop;

  admission_predictor u_pred (
    .clk, .rst_n,
    .pr_ptag(ptag(vic_baddr)), .pr_admit, .pr_hist(unused_hist), .pr_ctr(unused_ctr),
    .req,
    .pt_updated(ev_ptu), .hrt_alias(ev_alias), .queue_wait(ev_wait), .queue_drop(ev_drop)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      addr_q  <= '0;
      data_q  <= '0;
      wait_q  <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (accept) begin
          addr_q <= fetch_baddr;
          if (if_hit || ic_hit) begin
            data_q  <= if_hit ? if_data : ic_data;
            wait_q  <= ($clog2(ICACHE_LAT+1))'(ICACHE_LAT - 1);
            state_q <= (ICACHE_LAT > 1) ? S_HIT : S_RESP;
          end else begin
            state_q <= S_L2_REQ;
          end
        end
        S_HIT: begin
          wait_q <= wait_q - 1'b1;
          if (wait_q <= 1) state_q <= S_RESP;
        end
        S_L2_REQ:  if (l2_req_ready) state_q <= S_L2_WAIT;
        S_L2_WAIT: if (l2_resp_valid) begin
          data_q  <= l2_resp_data;
          state_q <= S_FILL;
        end
        S_FILL:    state_q <= S_RESP;
        S_RESP:    state_q <= S_IDLE;
        default:   state_q <= S_IDLE;
      endcase
    end
  end

  assign resp_valid   = (state_q == S_RESP);
  assign resp_baddr   = addr_q;
  assign resp_data    = data_q;
  assign l2_req_valid = (state_q == S_L2_REQ);
  assign l2_req_baddr = addr_q;

  always_comb begin
    events = '0;
    events.fetch                 = accept;
    events.ifilter_hit           = accept && if_hit;
    events.icache_hit            = accept && ic_hit;
    events.miss                  = accept && !if_hit && !ic_hit;
    events.ifilter_evict         = fill_en && vic_valid;
    events.free_insert           = fill_en && vic_valid && !cont_valid;
    events.admit                 = cshr_ins && pr_admit;
    events.bypass                = cshr_ins && !pr_admit;
    events.cshr_insert           = cshr_ins;
    events.cshr_victim_hit       = c_vhit;
    events.cshr_contender_hit    = c_chit;
    events.cshr_unresolved_evict = c_evict;
    events.fill                  = fill_en;
    events.pt_update             = ev_ptu;
    events.hrt_alias             = ev_alias;
    events.ptq_wait              = ev_wait;
    events.ptq_drop              = ev_drop;
  end

  // A block is never held by both structures at once
  a_exclusive: assert property (@(posedge clk) disable iff (!rst_n) accept |-> !(if_hit && ic_hit));
  a_l2_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                l2_req_valid && !l2_req_ready |=> l2_req_valid && $stable(l2_req_baddr));
endmodule
