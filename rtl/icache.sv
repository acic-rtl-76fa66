// icache: the L1 instruction cache that ACIC guards, set associative with
// LRU replacement inside a set (defaults: 32KB, 8 ways, 64 sets of 64-byte
// blocks).
//
// Under ACIC a block never enters the i-cache on a miss. It enters only as
// an i-Filter victim that the admission predictor lets in, and it then
// takes the place of the set's contender block, the way LRU would evict.
// The module therefore has three ports:
//  - lk_*  fetch lookup, in parallel with the i-Filter; a hit makes the
//          way most recently used at the next edge;
//  - cq_*  contender query for the set of a block address: whether the LRU
//          way holds a block, and its tag (an empty way is reported as
//          cont_valid = 0 and is filled without a contest);
//  - ins_* insert a block into that same way at the next edge, making it
//          most recently used.
// Lookup and contender query are combinational; the fixed hit latency of
// the L1 (4 cycles) is added by the top. Reset clears the valid bits.
// The cache function and sizes are those of the evaluated core; the
// age-based LRU and the port structure are choices of this design.
module icache
  import acic_pkg::*;
#(
  parameter int unsigned SETS       = IC_SETS,
  parameter int unsigned WAYS       = IC_WAYS,
  parameter int unsigned BADDR_BITS = BADDR_W,
  parameter int unsigned BLK_BITS = acic_pkg::BLOCK_BITS,
  localparam int unsigned IDX_W = $clog2(SETS),
  localparam int unsigned WW    = $clog2(WAYS),
  localparam int unsigned TAG_W = BADDR_BITS - IDX_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  lk_en,
  input  logic [BADDR_BITS-1:0] lk_baddr,
  output logic                  lk_hit,
  output logic [BLK_BITS-1:0] lk_data,
  input  logic [BADDR_BITS-1:0] cq_baddr,
  output logic                  cont_valid,
  output logic [TAG_W-1:0]      cont_tag,
  input  logic                  ins_en,
  input  logic [BLK_BITS-1:0] ins_data
);
  logic [WAYS-1:0]          valid_q [SETS];
  logic [WAYS-1:0][TAG_W-1:0] tag_q [SETS];
  logic [WAYS-1:0][WW-1:0]  age_q   [SETS];
  logic [BLK_BITS-1:0]    data_q  [SETS][WAYS];

  logic [IDX_W-1:0] lk_set, cq_set;
  logic [TAG_W-1:0] lk_tag;
  logic [WW-1:0]    hit_way, repl_way;
  logic             repl_free;
  logic [WAYS-1:0][WW-1:0] cq_age_next, lk_age_next;
  logic [WW-1:0]    unused_way;
  logic             unused_free;

  assign lk_set = lk_baddr[IDX_W-1:0];
  assign lk_tag = lk_baddr[BADDR_BITS-1:IDX_W];
  assign cq_set = cq_baddr[IDX_W-1:0];

  always_comb begin
    lk_hit  = 1'b0;
    hit_way = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (valid_q[lk_set][w] && tag_q[lk_set][w] == lk_tag) begin
        lk_hit  = 1'b1;
        hit_way = WW'(w);
      end
    end
    lk_data = data_q[lk_set][hit_way];
  end

  // Contender of the queried set, and its ages after an insertion
  lru_ages #(.N(WAYS)) u_lru_cq (
    .ages(age_q[cq_set]), .valid(valid_q[cq_set]), .touch_en(1'b1), .touch_way(repl_way),
    .ages_next(cq_age_next), .repl_way(repl_way), .repl_is_free(repl_free)
  );
  // Ages of the looked-up set after a hit
  lru_ages #(.N(WAYS)) u_lru_lk (
    .ages(age_q[lk_set]), .valid(valid_q[lk_set]), .touch_en(1'b1), .touch_way(hit_way),
    .ages_next(lk_age_next), .repl_way(unused_way), .repl_is_free(unused_free)
  );

  assign cont_valid = !repl_free;
  assign cont_tag   = tag_q[cq_set][repl_way];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        valid_q[s] <= '0;
        tag_q[s]   <= '0;
        for (int w = 0; w < WAYS; w++) age_q[s][w] <= WW'(w);
      end
    end else if (ins_en) begin
      valid_q[cq_set][repl_way] <= 1'b1;
      tag_q[cq_set][repl_way]   <= cq_baddr[BADDR_BITS-1:IDX_W];
      age_q[cq_set]             <= cq_age_next;
    end else if (lk_en && lk_hit) begin
      age_q[lk_set] <= lk_age_next;
    end
  end

  always_ff @(posedge clk) begin
    if (ins_en) data_q[cq_set][repl_way] <= ins_data;
  end

  a_no_lookup_and_insert: assert property (@(posedge clk) disable iff (!rst_n) !(lk_en && ins_en));
endmodule
