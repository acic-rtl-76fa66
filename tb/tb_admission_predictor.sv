// tb_admission_predictor: self-checking test of the two-level admission
// predictor with its training pipeline (1024-entry HRT, 16 PT counters,
// 10-slot PT update queues, 33 request ports) against a cycle model built
// from the description: requests read the HRT history and are queued at
// the PT entry that history selects in the same cycle, HRT registers shift
// at that edge (lowest port wins on aliasing), queue heads step the PT
// counters one cycle later.
// Phase 1 checks the latency: a single request on an idle predictor must
// change the prediction exactly two clock edges later. Phase 2 runs random
// request bursts over a small set of partial tags and compares the
// prediction outputs (history, counter, admit) for random tags every cycle.
module tb_admission_predictor;
  import acic_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  ptag_t pr_ptag = '0;
  logic  pr_admit, pt_updated, hrt_alias, queue_wait, queue_drop;
  logic [HIST_W-1:0] pr_hist;
  logic [CTR_W-1:0]  pr_ctr;
  upd_req_t req [NREQ];
  int checks = 0, failures = 0;

  admission_predictor dut (.*);

  logic [HIST_W-1:0] mh [HRT_ENTRIES];
  int                mc [PT_ENTRIES];
  bit                mq [PT_ENTRIES][$];

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic model_step();
    bit taken [HRT_ENTRIES];
    logic [HIST_W-1:0] h [NREQ];
    for (int i = 0; i < PT_ENTRIES; i++) begin
      if (mq[i].size() > 0) begin
        automatic bit inc = mq[i].pop_front();
        if (inc && mc[i] < 31) mc[i]++;
        else if (!inc && mc[i] > 0) mc[i]--;
      end
    end
    for (int p = 0; p < NREQ; p++) begin
      h[p] = mh[hrt_hash(req[p].vtag)];
      if (req[p].valid && mq[h[p]].size() < PTQ_DEPTH) mq[h[p]].push_back(req[p].outcome);
    end
    foreach (taken[i]) taken[i] = 0;
    for (int p = 0; p < NREQ; p++) begin
      automatic int ix = int'(hrt_hash(req[p].vtag));
      if (req[p].valid && !taken[ix]) begin
        taken[ix] = 1;
        mh[ix] = {h[p][HIST_W-2:0], req[p].outcome};
      end
    end
  endtask

  task automatic check_pred(ptag_t t);
    automatic int ix = int'(hrt_hash(t));
    pr_ptag = t;
    #1;
    chk(pr_hist == mh[ix], "history");
    chk(int'(pr_ctr) == mc[mh[ix]], "counter");
    chk(pr_admit == (mc[mh[ix]] >= 16), "admit");
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  ptag_t tags[12];
  initial begin
    automatic int n_alias = 0, n_wait = 0, n_drop = 0, n_bypass = 0;
    foreach (mh[i]) mh[i] = '0;
    foreach (mc[i]) mc[i] = 16;
    foreach (req[p]) req[p] = '0;
    foreach (tags[i]) tags[i] = ptag_t'($urandom);
    repeat (2) @(negedge clk);
    rst_n = 1;

    // Phase 1: latency. History of tags[0] is 0, so the request is queued
    // at PT entry 0; the counter goes 16 -> 15 two edges later.
    @(negedge clk);
    req[0] = '{valid: 1'b1, vtag: tags[0], outcome: 1'b0};
    model_step();
    @(negedge clk);
    req[0] = '0;
    model_step();
    pr_ptag = ptag_t'(tags[0] ^ 12'h400);   // another tag whose history is still 0
    if (hrt_hash(pr_ptag) == hrt_hash(tags[0])) pr_ptag = ~tags[0];
    #1 chk(pr_ctr == 5'd16, "PT unchanged one edge after the request");
    @(negedge clk);
    model_step();
    #1 chk(pr_ctr == 5'd15, "PT updated two edges after the request");
    check_pred(tags[0]);

    // Phase 2: random training traffic
    for (int c = 0; c < 6000; c++) begin
      @(negedge clk);
      for (int p = 0; p < NREQ; p++) begin
        req[p] = '0;
        if ($urandom_range(0, 99) < ((c % 300 < 40) ? 25 : 3)) begin
          req[p].valid   = 1'b1;
          req[p].vtag    = tags[$urandom_range(0, 11)];
          req[p].outcome = ($urandom_range(0, 99) < ((c / 1000) % 2 ? 25 : 75));
        end
      end
      check_pred(tags[$urandom_range(0, 11)]);
      if (!pr_admit) n_bypass++;
      if (hrt_alias) n_alias++;
      if (queue_wait) n_wait++;
      if (queue_drop) n_drop++;
      @(posedge clk);
      model_step();
    end
    chk(n_alias > 20 && n_wait > 20 && n_drop > 5 && n_bypass > 100, "aliasing, queueing, drops and bypass exercised");
    $display("alias=%0d wait=%0d drop=%0d bypass_predictions=%0d", n_alias, n_wait, n_drop, n_bypass);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
