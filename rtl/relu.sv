// relu: the activation step of the ODEBlock, y = max(0, x) on a Q20 word.
//
// Purely combinational; en = 0 passes the value unchanged so that the same
// batch-normalisation datapath can serve both BN steps, of which only the
// first is followed by ReLU (paper, Sec. 3.1, steps 2 and 3).
module relu
  import ode_pkg::*;
(
  input  logic en,
  input  q20_t x,
  output q20_t y
);
  always_comb y = (en && x < 0) ? q20_t'(0) : x;
endmodule
