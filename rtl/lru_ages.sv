// lru_ages: true-LRU bookkeeping for one fully associative group of N ways.
//
// Each way holds an age from 0 (most recently used) to N-1 (least recently
// used); the ages of a group are always a permutation of 0..N-1, so an age
// field is $clog2(N) bits, the LRU bit count the ACIC structures quote
// (4 for the 16-entry i-Filter, 5 for a 32-way CSHR set, 3 for an 8-way
// i-cache set). Purely combinational: given the current ages it reports the
// way to replace (an invalid way first, else the oldest) and the ages after
// touching way touch_way; the owner stores the result.
module lru_ages #(
  parameter int unsigned N = 8,
  localparam int unsigned W = (N > 1) ? $clog2(N) : 1
) (
  input  logic [N-1:0][W-1:0] ages,
  input  logic [N-1:0]        valid,
  input  logic                touch_en,
  input  logic [W-1:0]        touch_way,
  output logic [N-1:0][W-1:0] ages_next,
  output logic [W-1:0]        repl_way,
  output logic                repl_is_free   // repl_way is an invalid way
);
  always_comb begin
    repl_way     = '0;
    repl_is_free = 1'b0;
    for (int i = N - 1; i >= 0; i--) begin
      if (ages[i] == W'(N - 1)) repl_way = W'(i);
    end
    for (int i = N - 1; i >= 0; i--) begin
      if (!valid[i]) begin
        repl_way     = W'(i);
        repl_is_free = 1'b1;
      end
    end
  end

  always_comb begin
    ages_next = ages;
    if (touch_en) begin
      for (int i = 0; i < N; i++) begin
        if (W'(i) == touch_way)            ages_next[i] = '0;
        else if (ages[i] < ages[touch_way]) ages_next[i] = ages[i] + 1'b1;
      end
    end
  end
endmodule
