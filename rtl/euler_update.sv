// euler_update: the Euler step of the ODE solver, z_next = z + h * f.
//
// f is the output of the second batch normalisation (the building-block
// function f(z, theta)), h the Q20 step size and z the block input. The Q40
// product h*f is truncated to Q20 and the sum saturated to 32 bits.
// Combinational; with en = 0 the output is f itself (plain BN output).
// The paper gives the equation (Eq. 5) and that the result BRAM holds the
// step result; the arithmetic rounding here is this design's own.
module euler_update
  import ode_pkg::*;
(
  input  logic en,
  input  q20_t z,   // current state z(t_i)
  input  q20_t h,   // step size, Q20
  input  q20_t f,   // f(z(t_i)), Q20
  output q20_t y    // z(t_{i+1}) when en, else f
);
  acc_t prod;
  always_comb begin
    prod = (acc_t'(h) * acc_t'(f)) >>> FRAC_W;
    y    = en ? sat32(acc_t'(z) + prod) : f;
  end
endmodule
