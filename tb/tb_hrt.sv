// tb_hrt: self-checking test of the History Register Table (1024 x 4 bits,
// 33 update ports) against an array model. Each cycle a random subset of
// ports updates registers drawn from a narrow index range, so several ports
// often alias; every port must read the pre-update history, only the
// lowest aliasing port may write, and the written value is the history
// shifted left with the outcome in the LSB. The prediction port is checked
// at random indices.
module tb_hrt;
  import acic_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [HRT_IDX_W-1:0] pr_idx = '0;
  logic [HIST_W-1:0]    pr_hist;
  logic [NREQ-1:0]      up_valid = '0, up_outcome = '0, up_written;
  logic [NREQ-1:0][HRT_IDX_W-1:0] up_idx = '0;
  logic [NREQ-1:0][HIST_W-1:0]    up_hist;
  int checks = 0, failures = 0;

  hrt dut (.*);

  logic [HIST_W-1:0] m [HRT_ENTRIES];

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
    automatic int nalias = 0;
    bit taken [HRT_ENTRIES];
    foreach (m[i]) m[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (5000) begin
      @(negedge clk);
      for (int p = 0; p < NREQ; p++) begin
        up_valid[p]   = ($urandom_range(0, 99) < 30);
        up_idx[p]     = HRT_IDX_W'(($urandom_range(0, 1) ? 10'h300 : 10'h000) + $urandom_range(0, 40));
        up_outcome[p] = 1'($urandom);
      end
      pr_idx = HRT_IDX_W'($urandom_range(0, 1) ? $urandom_range(0, 40) : $urandom_range(0, 1023));
      #1;
      chk(pr_hist == m[pr_idx], "prediction read");
      foreach (taken[i]) taken[i] = 0;
      for (int p = 0; p < NREQ; p++) begin
        if (up_valid[p]) begin
          chk(up_hist[p] == m[up_idx[p]], "update read");
          chk(up_written[p] == !taken[up_idx[p]], "one write per register");
          if (taken[up_idx[p]]) nalias++;
          taken[up_idx[p]] = 1;
        end
      end
      @(posedge clk);
      for (int p = 0; p < NREQ; p++) begin
        if (up_valid[p] && up_written[p]) m[up_idx[p]] = {m[up_idx[p]][HIST_W-2:0], up_outcome[p]};
      end
    end
    chk(nalias > 100, "aliasing exercised");
    $display("aliased requests=%0d", nalias);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
