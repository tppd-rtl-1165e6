// lru_age_update: LRU bookkeeping for one cache set.
//
// Every way carries an age; the ages of a set are always a permutation of
// 0..WAYS-1, age 0 being the most recently used way and WAYS-1 the least
// recently used one (the victim of plain LRU).  When a way is touched (hit or
// fill) it takes age 0 and every way that was younger than it ages by one;
// older ways keep their age, so the permutation is preserved.
//
// The victim search of TPPD reads these ages ("the oldest block"); the update
// rule itself is the standard one and is this design's choice.
//
// Purely combinational: ages_o is valid in the same cycle as ages_i / way_i.
module lru_age_update #(
  parameter int unsigned WAYS  = tppd_pkg::LLC_WAYS,
  parameter int unsigned AGE_W = $clog2(WAYS)
) (
  input  logic [WAYS-1:0][AGE_W-1:0] ages_i,
  input  logic [$clog2(WAYS)-1:0]    way_i,
  output logic [WAYS-1:0][AGE_W-1:0] ages_o
);

  logic [AGE_W-1:0] ref_age;

  always_comb begin
    ref_age = ages_i[way_i];
    for (int w = 0; w < WAYS; w++) begin
      if (w == int'(way_i))
        ages_o[w] = '0;
      else if (ages_i[w] < ref_age)
        ages_o[w] = ages_i[w] + 1'b1;
      else
        ages_o[w] = ages_i[w];
    end
  end

endmodule
