// tb_pt_update_queue: self-checking test of one 10-slot PT update queue
// with 33 push ports against a queue model. Bursts of up to 12 pushes per
// cycle alternate with quiet periods, so the queue fills, drops and
// drains. Checked every cycle: head valid and direction, occupancy, and
// the number of pushes dropped; also that a request pushed into an empty
// queue is at the head in the very next cycle.
module tb_pt_update_queue;
  import acic_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NREQ-1:0] push_valid = '0, push_inc = '0;
  logic [HIST_W-1:0] push_idx = 4'd9;
  logic head_valid, head_inc;
  logic [HIST_W-1:0] head_idx;
  logic [$clog2(PTQ_DEPTH+1)-1:0] count;
  logic [$clog2(NREQ+1)-1:0] n_dropped;
  int checks = 0, failures = 0;

  pt_update_queue dut (.*);

  bit q[$];

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
    automatic int ndrop = 0, nfull = 0, nlat = 0, exp_drop;
    automatic bit was_empty_push;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 8000; c++) begin
      @(negedge clk);
      push_valid = '0;
      if ((c / 50) % 2 == 0) begin
        repeat ($urandom_range(0, 12)) push_valid[$urandom_range(0, NREQ-1)] = 1'b1;
      end else if ($urandom_range(0, 9) == 0) begin
        push_valid[$urandom_range(0, NREQ-1)] = 1'b1;
      end
      push_inc = NREQ'({$urandom(), $urandom()});
      #1;
      chk(head_valid == (q.size() > 0), "head valid");
      if (q.size() > 0) chk(head_inc == q[0] && head_idx == push_idx, "head content");
      chk(int'(count) == q.size(), "count");
      was_empty_push = (q.size() == 0) && (push_valid != '0);
      if (q.size() > 0) void'(q.pop_front());
      exp_drop = 0;
      for (int p = 0; p < NREQ; p++) begin
        if (push_valid[p]) begin
          if (q.size() < PTQ_DEPTH) q.push_back(push_inc[p]);
          else exp_drop++;
        end
      end
      if (q.size() == PTQ_DEPTH) nfull++;
      chk(int'(n_dropped) == exp_drop, "dropped count");
      ndrop += exp_drop;
      @(negedge clk);
      push_valid = '0;
      #1;
      if (was_empty_push) begin
        nlat++;
        chk(head_valid, "one-cycle latency through an empty queue");
      end
      chk(head_valid == (q.size() > 0), "head valid (idle)");
      if (q.size() > 0) chk(head_inc == q[0], "head content (idle)");
      if (q.size() > 0) void'(q.pop_front());
    end
    chk(ndrop > 50 && nfull > 50 && nlat > 50, "full, drop and latency exercised");
    $display("dropped=%0d full_cycles=%0d", ndrop, nfull);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
