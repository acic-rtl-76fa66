// tb_icache: self-checking test of the L1 i-cache (default size, 64 sets x
// 8 ways) against a per-set LRU list model. Block addresses are drawn from
// a pool that maps 14 blocks onto each of 4 sets, so sets overflow.
// Each step either looks a block up (hit flag and data checked, a hit makes
// it MRU) or, on a miss, inserts it: before the insert the contender
// reported for the set must be the model's LRU block, or none while the
// set has an empty way.
module tb_icache;
  import acic_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic   lk_en = 0, lk_hit, cont_valid, ins_en = 0;
  baddr_t lk_baddr = '0, cq_baddr = '0;
  block_t lk_data, ins_data = '0;
  logic [IC_TAG_W-1:0] cont_tag;
  int checks = 0, failures = 0;

  icache dut (.*);

  function automatic block_t blk(baddr_t a);
    return {8{~a, 6'(a[11:6] ^ a[5:0])}};
  endfunction

  baddr_t lists [IC_SETS][$];
  baddr_t pool[56];

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int idx, pos, s, nhit = 0, nrepl = 0;
    foreach (pool[i]) pool[i] = {BADDR_W'({$urandom(), $urandom()}) >> IC_IDX_W, IC_IDX_W'((i % 4) * 13 + 1)};
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (3000) begin
      @(negedge clk);
      idx = $urandom_range(0, 55);
      s = int'(ic_index(pool[idx]));
      lk_en = 1; lk_baddr = pool[idx];
      #1;
      pos = -1;
      foreach (lists[s][i]) if (lists[s][i] == pool[idx]) pos = i;
      chk(lk_hit == (pos >= 0), "hit flag");
      if (pos >= 0) begin
        nhit++;
        chk(lk_data == blk(pool[idx]), "hit data");
        lists[s].delete(pos);
        lists[s].push_front(pool[idx]);
      end
      @(negedge clk);
      lk_en = 0;
      if (pos < 0) begin
        cq_baddr = pool[idx];
        #1;
        chk(cont_valid == (lists[s].size() == IC_WAYS), "contender valid");
        if (lists[s].size() == IC_WAYS) begin
          nrepl++;
          chk(cont_tag == ic_tag(lists[s][IC_WAYS-1]), "contender is LRU");
          void'(lists[s].pop_back());
        end
        ins_en = 1; ins_data = blk(pool[idx]);
        lists[s].push_front(pool[idx]);
        @(negedge clk);
        ins_en = 0;
      end
    end
    chk(nhit > 200 && nrepl > 200, "hits and replacements exercised");
    $display("hits=%0d replacements=%0d", nhit, nrepl);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
