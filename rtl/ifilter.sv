// ifilter: the i-Filter, a small fully associative buffer of instruction
// blocks that sits beside the L1 i-cache and absorbs the burst of spatial
// and short-term temporal accesses that follows the first touch of a block.
//
// Every fetch looks the block address up here and in the i-cache at the
// same time (lk_*). A block that missed in both is brought from L2 and
// placed only here (fill_*). When no entry is free the LRU entry is
// displaced; victim_* shows, combinationally and before the fill edge, the
// block the next fill would displace, so the admission logic can decide its
// fate in the fill cycle. Each entry holds the full 58-bit block address as
// tag, a valid bit, a 4-bit LRU age and the 64-byte block, as in the ACIC
// storage budget. The sizes follow ACIC; the age-based true-LRU encoding
// and taking a free entry before the LRU one are choices of this design.
//
// Timing: lookups are combinational; the LRU update of a hit and the write
// of a fill happen at the next rising clock edge. Reset clears all valid
// bits. A lookup and a fill in the same cycle are not allowed (asserted).
module ifilter
  import acic_pkg::*;
#(
  parameter int unsigned ENTRIES    = IF_ENTRIES,
  parameter int unsigned TAG_W      = BADDR_W,
  parameter int unsigned BLK_BITS = acic_pkg::BLOCK_BITS,
  localparam int unsigned IW = $clog2(ENTRIES)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // lookup
  input  logic                  lk_en,
  input  logic [TAG_W-1:0]      lk_tag,
  output logic                  lk_hit,
  output logic [BLK_BITS-1:0] lk_data,
  // fill from L2
  input  logic                  fill_en,
  input  logic [TAG_W-1:0]      fill_tag,
  input  logic [BLK_BITS-1:0] fill_data,
  // block a fill would displace
  output logic                  victim_valid,
  output logic [TAG_W-1:0]      victim_tag,
  output logic [BLK_BITS-1:0] victim_data
);
  logic [ENTRIES-1:0]                 valid_q;
  logic [ENTRIES-1:0][TAG_W-1:0]      tag_q;
  logic [BLK_BITS-1:0]              data_q [ENTRIES];
  logic [ENTRIES-1:0][IW-1:0]         age_q, age_d;

  logic [IW-1:0] hit_way, repl_way, touch_way;
  logic          repl_free;

  always_comb begin
    lk_hit  = 1'b0;
    hit_way = '0;
    for (int i = 0; i < ENTRIES; i++) begin
      if (valid_q[i] && tag_q[i] == lk_tag) begin
        lk_hit  = 1'b1;
        hit_way = IW'(i);
      end
    end
    lk_data = data_q[hit_way];
  end

  assign touch_way = fill_en ? repl_way : hit_way;

  lru_ages #(.N(ENTRIES)) u_lru (
    .ages        (age_q),
    .valid       (valid_q),
    .touch_en    (fill_en || (lk_en && lk_hit)),
    .touch_way   (touch_way),
    .ages_next   (age_d),
    .repl_way    (repl_way),
    .repl_is_free(repl_free)
  );

  assign victim_valid = !repl_free;
  assign victim_tag   = tag_q[repl_way];
  assign victim_data  = data_q[repl_way];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
      tag_q   <= '0;
      for (int i = 0; i < ENTRIES; i++) age_q[i] <= IW'(i);
    end else begin
      age_q <= age_d;
      if (fill_en) begin
        valid_q[repl_way] <= 1'b1;
        tag_q[repl_way]   <= fill_tag;
      end
    end
  end

  // Block storage: written only, never reset
  always_ff @(posedge clk) begin
    if (fill_en) data_q[repl_way] <= fill_data;
  end

  a_no_lookup_and_fill: assert property (@(posedge clk) disable iff (!rst_n) !(lk_en && fill_en));
endmodule
