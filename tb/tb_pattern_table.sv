// tb_pattern_table: self-checking test of the 16 x 5-bit pattern table.
// Checks the reset value (every counter at the threshold, so a cold table
// admits), then random increments and decrements on random entries against
// a saturating-counter model, with the prediction port read each cycle:
// pr_admit must equal (model counter >= 16). Saturation at both ends is
// driven deliberately.
module tb_pattern_table;
  import acic_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [HIST_W-1:0] pr_hist = '0;
  logic pr_admit;
  logic [CTR_W-1:0] pr_ctr;
  logic [PT_ENTRIES-1:0] upd_en = '0, upd_inc = '0;
  int checks = 0, failures = 0;

  pattern_table dut (.*);

  int m [PT_ENTRIES];

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
    automatic int nsat_hi = 0, nsat_lo = 0, nno = 0;
    foreach (m[i]) m[i] = 16;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < PT_ENTRIES; i++) begin
      pr_hist = HIST_W'(i);
      #1 chk(pr_ctr == 5'd16 && pr_admit, "reset value admits");
    end
    for (int c = 0; c < 6000; c++) begin
      @(negedge clk);
      for (int i = 0; i < PT_ENTRIES; i++) begin
        upd_en[i] = ($urandom_range(0, 99) < 40);
        // entries 0-3 pushed up, 4-7 down, the rest at random
        upd_inc[i] = (i < 4) ? 1'b1 : (i < 8) ? 1'b0 : 1'($urandom);
        if (c % 2000 > 1500) upd_inc[i] = ~upd_inc[i];
      end
      pr_hist = HIST_W'($urandom_range(0, PT_ENTRIES - 1));
      #1;
      chk(pr_ctr == CTR_W'(m[pr_hist]), "counter value");
      chk(pr_admit == (m[pr_hist] >= 16), "threshold");
      if (!pr_admit) nno++;
      @(posedge clk);
      for (int i = 0; i < PT_ENTRIES; i++) begin
        if (upd_en[i]) begin
          if (upd_inc[i]) begin if (m[i] == 31) nsat_hi++; else m[i]++; end
          else begin if (m[i] == 0) nsat_lo++; else m[i]--; end
        end
      end
    end
    chk(nsat_hi > 10 && nsat_lo > 10 && nno > 100, "saturation and bypass exercised");
    $display("sat_hi=%0d sat_lo=%0d below_threshold=%0d", nsat_hi, nsat_lo, nno);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
