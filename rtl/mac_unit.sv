// mac_unit: one multiply-add unit of the convolution datapath.
//
// Each enabled cycle it multiplies two Q20 operands into a full Q40 product
// and either loads it into the 64-bit accumulator (first = 1, start of a new
// output pixel) or adds it to the accumulator. The accumulator is
// registered: a product presented in cycle t is visible on acc in cycle t+1.
// The conversion back to Q20 is done by the consumer. The paper names
// "multiply-add units" and scales their number from 1 to 64; the exact
// pipeline of a unit is this design's own.
module mac_unit
  import ode_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic en,      // accumulate this cycle
  input  logic first,   // start a new sum with this product
  input  q20_t a,       // Q20 operand (feature value)
  input  q20_t b,       // Q20 operand (weight)
  output acc_t acc      // Q40 running sum
);
  acc_t prod;
  assign prod = acc_t'(a) * acc_t'(b);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      acc <= '0;
    else if (en)     acc <= first ? prod : acc + prod;
  end
endmodule
