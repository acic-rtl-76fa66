// l2_model: behavioural stand-in for the L2 cache seen by the ACIC miss
// path, for simulation only. It accepts one request at a time (ready while
// idle) and returns the block LAT cycles after accepting the request (LAT >= 2); the returned data is a
// fixed function of the block address (see blk_data), so any test can
// predict it. LAT defaults to the 15-cycle L2 of the evaluated core. Not
// synthesizable in intent: it models a part that ACIC does not design.
module l2_model
  import acic_pkg::*;
#(
  parameter int unsigned LAT = 15
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   req_valid,
  output logic   req_ready,
  input  baddr_t req_baddr,
  output logic   resp_valid,
  output block_t resp_data,
  output int unsigned n_requests
);
  function automatic block_t blk_data(baddr_t a);
    return {a, 6'h15, ~a, 6'h2A, {6{a[31:0] ^ 32'h9E37_79B9, a[57:26]}}};
  endfunction

  int unsigned cnt;
  baddr_t      addr;
  logic        busy;

  assign req_ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; cnt <= 0; addr <= '0; resp_valid <= 1'b0; resp_data <= '0; n_requests <= 0;
    end else begin
      resp_valid <= 1'b0;
      if (!busy && req_valid) begin
        busy <= 1'b1; cnt <= LAT - 2; addr <= req_baddr; n_requests <= n_requests + 1;
      end else if (busy) begin
        if (cnt == 0) begin
          busy <= 1'b0; resp_valid <= 1'b1; resp_data <= blk_data(addr);
        end else begin
          cnt <= cnt - 1;
        end
      end
    end
  end
endmodule
