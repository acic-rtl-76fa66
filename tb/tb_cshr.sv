// tb_cshr: self-checking test of the CSHR (default 8 sets x 32 ways)
// against a model that keeps, per set, the live <victim, contender> pairs
// in insertion order. Random searches and insertions (sometimes in the
// same cycle) over two CSHR sets with partial tags from a small pool, so
// that victim matches, multiple contender matches and displacement of
// unresolved entries all occur. The requests produced in a cycle are
// compared with the model's as a sorted list of (victim tag, outcome).
module tb_cshr;
  import acic_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic srch_en = 0, ins_en = 0, victim_hit, contender_hit, evict_unresolved;
  logic [CSHR_SET_W-1:0] srch_set = '0, ins_set = '0;
  ptag_t srch_ptag = '0, ins_vtag = '0, ins_ctag = '0;
  upd_req_t req [CSHR_WAYS+1];
  int checks = 0, failures = 0;

  cshr dut (.*);

  typedef struct { ptag_t v; ptag_t c; } pair_t;
  pair_t live [CSHR_SETS][$];

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int nv = 0, nc = 0, nev = 0, nmulti = 0, nboth = 0;
    int exp_q[$], got_q[$];
    bit e_vh, e_ch, e_ev;
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (20000) begin
      @(negedge clk);
      srch_en  = ($urandom_range(0, 99) < 45);
      ins_en   = ($urandom_range(0, 99) < 55);
      srch_set = CSHR_SET_W'($urandom_range(0, 1) * 5);
      ins_set  = CSHR_SET_W'($urandom_range(0, 1) * 5);
      srch_ptag = ptag_t'($urandom_range(0, 47));
      ins_vtag  = ptag_t'($urandom_range(0, 47));
      ins_ctag  = ptag_t'($urandom_range(0, 11));   // contenders recur
      #1;
      // model
      exp_q.delete(); got_q.delete();
      e_vh = 0; e_ch = 0; e_ev = 0;
      begin
        automatic bit matched_oldest = 0;
        automatic bit full = (live[ins_set].size() == CSHR_WAYS);
        automatic int k;
        if (srch_en) begin
          k = 0;
          while (k < live[srch_set].size()) begin
            if (live[srch_set][k].v == srch_ptag || live[srch_set][k].c == srch_ptag) begin
              automatic bit o = (live[srch_set][k].v == srch_ptag);
              exp_q.push_back({live[srch_set][k].v, o});
              if (o) e_vh = 1; else e_ch = 1;
              if (k == 0 && srch_set == ins_set) matched_oldest = 1;
              live[srch_set].delete(k);
            end else k++;
          end
        end
        if (ins_en) begin
          if (full) begin
            if (!matched_oldest) begin
              exp_q.push_back({live[ins_set][0].v, 1'b1});
              e_ev = 1;
              live[ins_set].delete(0);
            end
          end
          live[ins_set].push_back('{v: ins_vtag, c: ins_ctag});
        end
      end
      for (int w = 0; w <= CSHR_WAYS; w++) if (req[w].valid) got_q.push_back({req[w].vtag, req[w].outcome});
      exp_q.sort(); got_q.sort();
      chk(exp_q == got_q, "update requests");
      chk(victim_hit == e_vh && contender_hit == e_ch && evict_unresolved == e_ev, "event flags");
      if (e_vh) nv++;
      if (e_ch) nc++;
      if (e_ev) nev++;
      if (got_q.size() > 2) nmulti++;
      if (srch_en && ins_en && srch_set == ins_set) nboth++;
    end
    chk(nv > 50 && nc > 50 && nev > 50 && nmulti > 20 && nboth > 50, "all cases exercised");
    $display("victim=%0d contender=%0d unresolved=%0d multi=%0d same_cycle=%0d", nv, nc, nev, nmulti, nboth);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
