// hyb_lru: true-LRU recency state and victim choice for every set.
//
// Used by non-isolated misses (the paper's step F): the victim is the least
// recently used way of the set, including the subcache ways, so the
// non-isolated domain keeps the full capacity of a conventional cache.
// Accesses by isolated domains to a subcache way also refresh that way's
// recency, which makes recently used isolated lines the least likely to be
// evicted by non-isolated traffic, as the paper asks.
//
// Each way of each set holds an age 0..WAYS-1 (0 = most recent); the ages of
// a set are always a permutation. touch(set, way) makes the way age 0 and
// ages by one every way that was younger. The victim is the lowest-numbered
// invalid way if there is one (this design's choice), else the way of age
// WAYS-1. Victim selection is combinational on rd_set/valid; touch takes
// effect on the next clock edge. Reset gives way i age i.
module hyb_lru #(
  parameter int unsigned SETS = 128,
  parameter int unsigned WAYS = 8,
  localparam int unsigned SET_W = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // victim query
  input  logic [SET_W-1:0] rd_set,
  input  logic [WAYS-1:0]  valid,
  output logic [WAY_W-1:0] victim,
  // recency update
  input  logic             touch,
  input  logic [SET_W-1:0] touch_set,
  input  logic [WAY_W-1:0] touch_way
);

  logic [WAY_W-1:0] age_q [SETS][WAYS];

  always_comb begin
    logic found;
    found  = 1'b0;
    victim = '0;
    for (int unsigned w = 0; w < WAYS; w++) begin
      if (!found && !valid[w]) begin
        victim = WAY_W'(w);
        found  = 1'b1;
      end
    end
    if (!found) begin
      for (int unsigned w = 0; w < WAYS; w++)
        if (age_q[rd_set][w] == WAY_W'(WAYS - 1)) victim = WAY_W'(w);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned s = 0; s < SETS; s++)
        for (int unsigned w = 0; w < WAYS; w++)
          age_q[s][w] <= WAY_W'(w);
    end else if (touch) begin
      for (int unsigned w = 0; w < WAYS; w++) begin
        if (WAY_W'(w) == touch_way)
          age_q[touch_set][w] <= '0;
        else if (age_q[touch_set][w] < age_q[touch_set][touch_way])
          age_q[touch_set][w] <= age_q[touch_set][w] + 1'b1;
      end
    end
  end

endmodule
