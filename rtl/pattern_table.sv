// pattern_table: second level of the admission predictor, 2^HIST_W
// saturating counters of CTR_W bits (16 x 5 in ACIC), indexed by the
// history read from the HRT.
//
// pr_hist selects a counter combinationally; the victim is admitted into
// the i-cache when that counter is at or above THRESHOLD. Each counter has
// its own update input (driven by the head of its update queue):
// upd_en[i] moves counter i one step at the next rising edge, up when
// upd_inc[i] is 1 and down otherwise, saturating at 0 and 2^CTR_W-1.
// Counters reset to THRESHOLD, so a cold predictor admits every victim,
// which is the plain i-Filter + i-cache behaviour; the threshold and the
// reset value are choices of this design.
module pattern_table
  import acic_pkg::*;
#(
  parameter int unsigned HW        = HIST_W,
  parameter int unsigned CW        = CTR_W,
  parameter int unsigned THRESHOLD = PT_THRESH,
  localparam int unsigned N = 1 << HW
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [HW-1:0] pr_hist,
  output logic          pr_admit,
  output logic [CW-1:0] pr_ctr,
  input  logic [N-1:0]  upd_en,
  input  logic [N-1:0]  upd_inc
);
  logic [CW-1:0] ctr_q [N];

  assign pr_ctr   = ctr_q[pr_hist];
  assign pr_admit = (ctr_q[pr_hist] >= CW'(THRESHOLD));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) ctr_q[i] <= CW'(THRESHOLD);
    end else begin
      for (int i = 0; i < N; i++) begin
        if (upd_en[i]) begin
          if (upd_inc[i] && ctr_q[i] != '1)       ctr_q[i] <= ctr_q[i] + 1'b1;
          else if (!upd_inc[i] && ctr_q[i] != '0) ctr_q[i] <= ctr_q[i] - 1'b1;
        end
      end
    end
  end
endmodule
