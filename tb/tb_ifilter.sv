// tb_ifilter: self-checking test of the i-Filter against a queue model of
// a 16-entry fully associative LRU buffer. Random fetches from a pool of
// 24 block addresses: a hit must return the block's data, a miss is
// followed by a fill, and the victim reported before each fill must be the
// model's least recently used block (or none while the buffer has room).
module tb_ifilter;
  import acic_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic   lk_en = 0, lk_hit, fill_en = 0, victim_valid;
  baddr_t lk_tag = '0, fill_tag = '0, victim_tag;
  block_t lk_data, fill_data = '0, victim_data;
  int checks = 0, failures = 0;

  ifilter dut (.*);

  function automatic block_t blk(baddr_t a);
    return {8{a ^ 58'h2AA_5555_0F0F_33CC, 6'(a[5:0] + 6'd7)}};
  endfunction

  baddr_t model[$];   // index 0 = MRU
  baddr_t pool[24];

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int idx, pos, nhit = 0, nevict = 0;
    foreach (pool[i]) pool[i] = BADDR_W'({$urandom(), $urandom()});
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (1500) begin
      @(negedge clk);
      idx = $urandom_range(0, 23);
      lk_en = 1; lk_tag = pool[idx];
      #1;
      pos = -1;
      foreach (model[i]) if (model[i] == pool[idx]) pos = i;
      chk(lk_hit == (pos >= 0), "hit flag");
      if (pos >= 0) begin
        nhit++;
        chk(lk_data == blk(pool[idx]), "hit data");
        model.delete(pos);
        model.push_front(pool[idx]);
      end
      @(negedge clk);
      lk_en = 0;
      if (pos < 0) begin
        fill_en = 1; fill_tag = pool[idx]; fill_data = blk(pool[idx]);
        #1;
        chk(victim_valid == (model.size() == 16), "victim_valid");
        if (model.size() == 16) begin
          nevict++;
          chk(victim_tag == model[15], "victim is LRU");
          chk(victim_data == blk(model[15]), "victim data");
          void'(model.pop_back());
        end
        model.push_front(pool[idx]);
        @(negedge clk);
        fill_en = 0;
      end
    end
    chk(nhit > 100 && nevict > 100, "both hits and evictions exercised");
    $display("hits=%0d evictions=%0d", nhit, nevict);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
