// star_lru: least-recently-used ordering of the ways of one set.
//
// Each way of a set carries an age from 0 (most recently used) to NWAYS-1
// (least recently used); the ages of a set are always a permutation. Touching
// a way gives it age 0 and ages by one every way that was younger. The victim
// is the way of the oldest age. The paper specifies LRU replacement; the age
// matrix encoding (3 bits per way) is this design's choice. The reset value
// of a set is age[w] = w.
//
// Purely combinational: age_o is age_i after touching touch_way_i when
// touch_i is high; victim_o is computed from age_i.
module star_lru
  import star_pkg::*;
(
  input  logic [NWAYS-1:0][WAY_W-1:0] age_i,
  input  logic                        touch_i,
  input  way_t                        touch_way_i,
  output logic [NWAYS-1:0][WAY_W-1:0] age_o,
  output way_t                        victim_o
);

  always_comb begin
    victim_o = '0;
    for (int w = 0; w < NWAYS; w++)
      if (age_i[w] == WAY_W'(NWAYS-1)) victim_o = way_t'(w);
  end

  always_comb begin
    age_o = age_i;
    for (int w = 0; w < NWAYS; w++) begin
      if (touch_i) begin
        if (w == int'(touch_way_i))                 age_o[w] = '0;
        else if (age_i[w] < age_i[touch_way_i])     age_o[w] = age_i[w] + 1'b1;
      end
    end
  end

endmodule
