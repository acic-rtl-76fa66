// hrt: History Register Table of the two-level admission predictor.
//
// ENTRIES registers of HIST_W bits (1024 x 4). Register i records the last
// HIST_W contest outcomes of the i-Filter victims whose partial tag hashes
// to i; each new outcome shifts the register left and enters at the LSB
// (1 = the victim was re-fetched before its i-cache contender).
//  - pr_* : prediction read port, combinational.
//  - up_* : NREQ update ports used together. Each port reads its register
//           combinationally (up_hist, the history before this update) so
//           the caller can pass it on to the pattern table, and the
//           register takes (history << 1) | outcome at the next edge. When
//           several ports name the same register in one cycle only the
//           lowest-numbered port writes it; the others are ignored, as ACIC
//           does for the rare HRT aliasing. up_written tells which ports
//           wrote; up_written[0] is always up_valid[0].
// Reset clears every history to 0, a choice of this design.
module hrt
  import acic_pkg::*;
#(
  parameter int unsigned ENTRIES = HRT_ENTRIES,
  parameter int unsigned HW      = HIST_W,
  parameter int unsigned NPORT   = NREQ,
  localparam int unsigned IW = $clog2(ENTRIES)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [IW-1:0]            pr_idx,
  output logic [HW-1:0]            pr_hist,
  input  logic [NPORT-1:0]         up_valid,
  input  logic [NPORT-1:0][IW-1:0] up_idx,
  input  logic [NPORT-1:0]         up_outcome,
  output logic [NPORT-1:0][HW-1:0] up_hist,
  output logic [NPORT-1:0]         up_written    // this port's write took effect
);
  logic [HW-1:0] hist_q [ENTRIES];

  assign pr_hist = hist_q[pr_idx];

  always_comb begin
    for (int p = 0; p < NPORT; p++) begin
      up_hist[p]    = hist_q[up_idx[p]];
      up_written[p] = up_valid[p];
      for (int q = 0; q < p; q++) begin
        if (up_valid[q] && up_idx[q] == up_idx[p]) up_written[p] = 1'b0;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) hist_q[i] <= '0;
    end else begin
      for (int p = 0; p < NPORT; p++) begin
        if (up_written[p]) hist_q[up_idx[p]] <= {up_hist[p][HW-2:0], up_outcome[p]};
      end
    end
  end
endmodule
