// bank_lru: least-recently-used replacement state for one cache bank.
//
// VESPA installs every missing line in the bank named by the physical
// bank-index bits and picks the victim by LRU among that bank's 4 ways only
// (the paper's "4way insertion policy"), so each bank keeps its own LRU
// state. The encoding is this design's choice: every way of every set has an
// age, 0 for the most recent and WAYS-1 for the least recent; ages within a
// set are always a permutation of 0..WAYS-1. Reset gives way w the age w.
//
// Interface and timing: touch_en marks touch_way of touch_set most recently
// used at the clock edge (ways younger than it age by one). victim is the
// way of vic_set whose age is WAYS-1, combinationally.
module bank_lru #(
  parameter int unsigned SETS = 64,
  parameter int unsigned WAYS = 4,
  localparam int unsigned SET_W = $clog2(SETS),
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             touch_en,
  input  logic [SET_W-1:0] touch_set,
  input  logic [WAY_W-1:0] touch_way,
  input  logic [SET_W-1:0] vic_set,
  output logic [WAY_W-1:0] victim
);
  logic [WAY_W-1:0] age_q [SETS][WAYS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned s = 0; s < SETS; s++)
        for (int unsigned w = 0; w < WAYS; w++)
          age_q[s][w] <= WAY_W'(w);
    end else if (touch_en) begin
      for (int unsigned w = 0; w < WAYS; w++) begin
        if (WAY_W'(w) == touch_way)
          age_q[touch_set][w] <= '0;
        else if (age_q[touch_set][w] < age_q[touch_set][touch_way])
          age_q[touch_set][w] <= age_q[touch_set][w] + 1'b1;
      end
    end
  end

  always_comb begin
    victim = '0;
    for (int unsigned w = 0; w < WAYS; w++)
      if (age_q[vic_set][w] == WAY_W'(WAYS - 1)) victim = WAY_W'(w);
  end
endmodule
