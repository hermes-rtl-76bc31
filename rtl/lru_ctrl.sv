// lru_ctrl: true-LRU bookkeeping for one cache set (helper of the caches).
//
// Each way keeps an age from 0 (most recent) to WAYS-1 (least recent); the
// ages of one set form a permutation and are stored packed next to the tags.
// Combinational: `victim` is the first invalid way or, if all are valid, the
// way of age WAYS-1; `ages_out` is `ages_in` after touching way `touch`.
// True LRU is this design's choice; the replacement policy is not specified.
module lru_ctrl #(
  parameter int WAYS = 8,
  parameter int AW   = $clog2(WAYS)
) (
  input  logic [WAYS*AW-1:0] ages_in,
  input  logic [WAYS-1:0]    valid,
  input  logic [AW-1:0]      touch,
  output logic [WAYS*AW-1:0] ages_out,
  output logic [AW-1:0]      victim
);
  logic [AW-1:0] t_age;
  logic          found;

  always_comb begin
    t_age = ages_in[touch*AW +: AW];
    for (int w = 0; w < WAYS; w++) begin
      if (w == int'(touch))
        ages_out[w*AW +: AW] = '0;
      else if (ages_in[w*AW +: AW] < t_age)
        ages_out[w*AW +: AW] = ages_in[w*AW +: AW] + AW'(1);
      else
        ages_out[w*AW +: AW] = ages_in[w*AW +: AW];
    end
  end

  always_comb begin
    victim = '0;
    found  = 1'b0;
    for (int w = 0; w < WAYS; w++)
      if (!found && !valid[w]) begin
        victim = AW'(w);
        found  = 1'b1;
      end
    for (int w = 0; w < WAYS; w++)
      if (!found && ages_in[w*AW +: AW] == AW'(WAYS-1)) begin
        victim = AW'(w);
        found  = 1'b1;
      end
  end
endmodule
