// pt_update_queue: the small FIFO in front of one pattern-table counter.
//
// Several contests can resolve in one cycle (a block can be the contender
// of many CSHR entries), and their histories may select the same PT
// counter, which can take only one step per cycle. Each PT entry therefore
// has its own DEPTH-slot queue (10 slots in ACIC) of pending updates; a
// slot holds the HIST_W-bit PT index and the direction bit (1 = increment).
//
// Interface and timing: up to NPUSH pushes per cycle (push_valid bits,
// taken in port order); the head is presented on head_* and is popped at
// every rising edge where head_valid is 1, so a request pushed in cycle t
// reaches the counter at the end of cycle t+1 when the queue was empty.
// Pushes that find no free slot (after this cycle's pop) are dropped and
// counted on n_dropped. The queue organisation and depth follow ACIC; the
// drop-on-full rule and multi-push order are choices of this design.
module pt_update_queue
  import acic_pkg::*;
#(
  parameter int unsigned DEPTH = PTQ_DEPTH,
  parameter int unsigned HW    = HIST_W,
  parameter int unsigned NPUSH = NREQ,
  localparam int unsigned CW = $clog2(DEPTH + 1),
  localparam int unsigned DW = $clog2(NPUSH + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NPUSH-1:0]  push_valid,
  input  logic [NPUSH-1:0]  push_inc,
  input  logic [HW-1:0]     push_idx,
  output logic              head_valid,
  output logic              head_inc,
  output logic [HW-1:0]     head_idx,
  output logic [CW-1:0]     count,
  output logic [DW-1:0]     n_dropped
);
  typedef struct packed {
    logic [HW-1:0] idx;
    logic          inc;
  } slot_t;

  slot_t         slot_q [DEPTH];
  slot_t         slot_d [DEPTH];
  logic [CW-1:0] count_q, count_d;

  assign head_valid = (count_q != '0);
  assign head_inc   = slot_q[0].inc;
  assign head_idx   = slot_q[0].idx;
  assign count      = count_q;

  always_comb begin
    int unsigned pos;
    // pop
    for (int i = 0; i < DEPTH - 1; i++) slot_d[i] = head_valid ? slot_q[i+1] : slot_q[i];
    slot_d[DEPTH-1] = head_valid ? '0 : slot_q[DEPTH-1];
    pos       = head_valid ? int'(count_q) - 1 : int'(count_q);
    n_dropped = '0;
    // pushes
    for (int p = 0; p < NPUSH; p++) begin
      if (push_valid[p]) begin
        if (pos < DEPTH) begin
          slot_d[pos] = '{idx: push_idx, inc: push_inc[p]};
          pos++;
        end else begin
          n_dropped++;
        end
      end
    end
    count_d = CW'(pos);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count_q <= '0;
      for (int i = 0; i < DEPTH; i++) slot_q[i] <= '0;
    end else begin
      count_q <= count_d;
      for (int i = 0; i < DEPTH; i++) slot_q[i] <= slot_d[i];
    end
  end

  a_count_bound: assert property (@(posedge clk) disable iff (!rst_n) count_q <= CW'(DEPTH));
endmodule
