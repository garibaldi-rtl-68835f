// miss_cost_aging: ages a pair-table miss cost by the colour timer and compares
// it with the protection threshold.
//
// Each pair-table entry remembers the colour (value of the l-bit period timer)
// at which it was last written. Its aged cost is the stored cost minus the
// number of colour steps taken since then, counted modulo 2^l and floored at
// zero: an entry written at colour 5 and read at colour 0 has aged by 3 steps
// (5 -> 6 -> 7 -> 0), so a stored cost of 25 ages to 22. `protect` is
// (aged cost > threshold), the test used both by replacement queries and by
// collisions on allocation. The subtraction of one per colour step and the
// strict comparison follow the paper; flooring at zero is this design's choice.
//
// Purely combinational; no clock.
module miss_cost_aging #(
  parameter int unsigned COST_W     = 6,
  parameter int unsigned COLOR_BITS = 3
) (
  input  logic [COST_W-1:0]     cost,
  input  logic [COLOR_BITS-1:0] last_color,
  input  logic [COLOR_BITS-1:0] cur_color,
  input  logic [COST_W-1:0]     threshold,
  output logic [COST_W-1:0]     aged_cost,
  output logic                  protect
);
  logic [COLOR_BITS-1:0] steps;
  logic [COST_W:0]       steps_ext;

  always_comb begin
    steps     = cur_color - last_color;   // modulo 2^COLOR_BITS
    steps_ext = (COST_W+1)'(steps);
    if ({1'b0, cost} > steps_ext) aged_cost = cost - COST_W'(steps);
    else                          aged_cost = '0;
    protect = aged_cost > threshold;
  end
endmodule
