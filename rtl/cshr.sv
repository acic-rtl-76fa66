// cshr: Comparison Status Holding Registers. Each entry is an unresolved
// contest between an i-Filter victim and the i-cache contender it was
// matched against: which of the two is fetched again first.
//
// Organisation: SETS x WAYS entries (8 x 32 = 256), each holding the 12-bit
// partial tag of the victim, the 12-bit partial tag of the contender, a
// valid bit and a 5-bit LRU age. Victim and contender share an i-cache set,
// and the set's m most significant index bits choose the CSHR set, both for
// insertion and for search.
//  - Search (srch_*): every fetched block's partial tag is compared with
//    both fields of every valid entry of its CSHR set in parallel. A match
//    on the victim field yields an update request with outcome 1 (victim
//    came back first); a match on a contender field yields outcome 0. A
//    block can be the contender of several entries, so one search can give
//    up to WAYS requests, one per way (req[0..WAYS-1]). Matched entries are
//    invalidated at the next edge. If both fields of one entry match, the
//    victim field wins.
//  - Insert (ins_*): a new pair goes into a free way, else the LRU way of
//    the set. A valid entry displaced this way is resolved as if the victim
//    had won, and req[WAYS] carries that outcome-1 request.
// Requests are combinational outputs valid in the cycle of the search or
// insert; the entry state changes at the next rising edge. Search and
// insert may happen in the same cycle; an entry resolved by the search is
// not reported again as displaced. Everything except the tie rule and the
// free-way-first choice follows the ACIC description.
module cshr
  import acic_pkg::*;
#(
  parameter int unsigned SETS  = CSHR_SETS,
  parameter int unsigned WAYS  = CSHR_WAYS,
  localparam int unsigned SW = $clog2(SETS),
  localparam int unsigned WW = $clog2(WAYS)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               srch_en,
  input  logic [SW-1:0]      srch_set,
  input  ptag_t              srch_ptag,
  input  logic               ins_en,
  input  logic [SW-1:0]      ins_set,
  input  ptag_t              ins_vtag,
  input  ptag_t              ins_ctag,
  output upd_req_t           req [WAYS+1],
  output logic               victim_hit,     // some victim field matched
  output logic               contender_hit,  // some contender field matched
  output logic               evict_unresolved
);
  typedef struct packed {
    logic  valid;
    ptag_t vtag;
    ptag_t ctag;
  } entry_t;

  entry_t               ent_q [SETS][WAYS];
  logic [WAYS-1:0][WW-1:0] age_q [SETS];

  logic [WAYS-1:0] match;
  logic [WAYS-1:0] ins_valid_vec;
  logic [WAYS-1:0][WW-1:0] ins_age_next;
  logic [WW-1:0]   ins_way;
  logic            ins_free;
  logic            ins_displaces;

  always_comb begin
    match         = '0;
    victim_hit    = 1'b0;
    contender_hit = 1'b0;
    for (int w = 0; w < WAYS; w++) begin
      req[w] = '0;
      if (srch_en && ent_q[srch_set][w].valid) begin
        if (ent_q[srch_set][w].vtag == srch_ptag) begin
          match[w]   = 1'b1;
          req[w]     = '{valid: 1'b1, vtag: ent_q[srch_set][w].vtag, outcome: 1'b1};
          victim_hit = 1'b1;
        end else if (ent_q[srch_set][w].ctag == srch_ptag) begin
          match[w]      = 1'b1;
          req[w]        = '{valid: 1'b1, vtag: ent_q[srch_set][w].vtag, outcome: 1'b0};
          contender_hit = 1'b1;
        end
      end
    end
  end

  always_comb begin
    for (int w = 0; w < WAYS; w++) ins_valid_vec[w] = ent_q[ins_set][w].valid;
  end

  lru_ages #(.N(WAYS)) u_lru (
    .ages(age_q[ins_set]), .valid(ins_valid_vec), .touch_en(1'b1), .touch_way(ins_way),
    .ages_next(ins_age_next), .repl_way(ins_way), .repl_is_free(ins_free)
  );

  always_comb begin
    ins_displaces = ins_en && !ins_free &&
                    !(srch_en && srch_set == ins_set && match[ins_way]);
    req[WAYS] = '0;
    if (ins_displaces)
      req[WAYS] = '{valid: 1'b1, vtag: ent_q[ins_set][ins_way].vtag, outcome: 1'b1};
  end
  assign evict_unresolved = ins_displaces;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        for (int w = 0; w < WAYS; w++) begin
          ent_q[s][w] <= '0;
          age_q[s][w] <= WW'(w);
        end
      end
    end else begin
      if (srch_en) begin
        for (int w = 0; w < WAYS; w++)
          if (match[w]) ent_q[srch_set][w].valid <= 1'b0;
      end
      if (ins_en) begin
        ent_q[ins_set][ins_way] <= '{valid: 1'b1, vtag: ins_vtag, ctag: ins_ctag};
        age_q[ins_set]          <= ins_age_next;
      end
    end
  end
endmodule
