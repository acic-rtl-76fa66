// admission_predictor: the two-level i-cache admission predictor of ACIC,
// with its training datapath.
//
// Prediction (combinational): the partial tag of the i-Filter victim is
// hashed to an HRT index, the 4-bit history found there selects a PT
// counter, and pr_admit = counter >= threshold decides whether the victim
// replaces its i-cache contender or is thrown away.
//
// Training: NREQ update requests per cycle, each the victim partial tag of
// a resolved CSHR contest and its outcome.
//   cycle 1: all requests index the HRT in parallel (same hash); each reads
//            the current history, which is pushed, with the outcome, into
//            the update queue of the PT entry that history selects; at the
//            same edge the HRT registers shift in the outcomes (one request
//            per register when several alias).
//   cycle 2: the head of every non-empty PT update queue is popped and
//            steps its counter; requests that had to wait in a queue take
//            one more cycle per request ahead of them.
// A request therefore reaches the PT two cycles after it is presented,
// more when it queues. Structure and sizes follow ACIC; the hash and the
// threshold live in acic_pkg and are this design's choices.
module admission_predictor
  import acic_pkg::*;
#(
  parameter int unsigned HRT_N  = HRT_ENTRIES,
  parameter int unsigned HW     = HIST_W,
  parameter int unsigned CW     = CTR_W,
  parameter int unsigned QDEPTH = PTQ_DEPTH,
  parameter int unsigned NPORT  = NREQ,
  localparam int unsigned IW = $clog2(HRT_N),
  localparam int unsigned NPT = 1 << HW,
  localparam int unsigned DW = $clog2(NPORT + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  ptag_t         pr_ptag,
  output logic          pr_admit,
  output logic [HW-1:0] pr_hist,
  output logic [CW-1:0] pr_ctr,
  input  upd_req_t      req [NPORT],
  output logic          pt_updated,   // some PT counter stepped this cycle
  output logic          hrt_alias,    // an HRT update was ignored for aliasing
  output logic          queue_wait,   // some PT queue holds more than one request
  output logic          queue_drop    // a request was lost to a full PT queue
);
  logic [NPORT-1:0]          up_valid, up_outcome, up_written;
  logic [NPORT-1:0][IW-1:0]  up_idx;
  logic [NPORT-1:0][HW-1:0]  up_hist;
  logic [NPT-1:0]            q_head_valid, q_head_inc, q_wait, q_drop;

  hrt #(.ENTRIES(HRT_N), .HW(HW), .NPORT(NPORT)) u_hrt (
    .clk, .rst_n,
    .pr_idx    (IW'(hrt_hash(pr_ptag))),
    .pr_hist   (pr_hist),
    .up_valid, .up_idx, .up_outcome, .up_hist, .up_written
  );

  always_comb begin
    for (int p = 0; p < NPORT; p++) begin
      up_valid[p]   = req[p].valid;
      up_idx[p]     = IW'(hrt_hash(req[p].vtag));
      up_outcome[p] = req[p].outcome;
    end
  end

  assign hrt_alias = |(up_valid & ~up_written);

  for (genvar q = 0; q < NPT; q++) begin : g_ptq
    logic [NPORT-1:0]             push;
    logic [HW-1:0]                unused_idx;
    logic [$clog2(QDEPTH+1)-1:0]  cnt;
    logic [DW-1:0]                ndrop;
    always_comb begin
      for (int p = 0; p < NPORT; p++) push[p] = up_valid[p] && (up_hist[p] == HW'(q));
    end
    pt_update_queue #(.DEPTH(QDEPTH), .HW(HW), .NPUSH(NPORT)) u_q (
      .clk, .rst_n,
      .push_valid(push), .push_inc(up_outcome), .push_idx(HW'(q)),
      .head_valid(q_head_valid[q]), .head_inc(q_head_inc[q]), .head_idx(unused_idx),
      .count(cnt), .n_dropped(ndrop)
    );
    assign q_wait[q] = (cnt > 1);
    assign q_drop[q] = (ndrop != '0);
  end

  pattern_table #(.HW(HW), .CW(CW), .THRESHOLD(PT_THRESH)) u_pt (
    .clk, .rst_n,
    .pr_hist (pr_hist),
    .pr_admit(pr_admit),
    .pr_ctr  (pr_ctr),
    .upd_en  (q_head_valid),
    .upd_inc (q_head_inc)
  );

  assign pt_updated = |q_head_valid;
  assign queue_wait = |q_wait;
  assign queue_drop = |q_drop;
endmodule
