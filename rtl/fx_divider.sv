// fx_divider: the division unit of the batch-normalisation steps.
//
// Sequential restoring divider: a 64-bit signed dividend by a 32-bit signed
// divisor, one quotient bit per cycle. start (while idle) loads the operands;
// done pulses for one cycle 66 cycles later with quot valid (it stays valid
// until the next start). The quotient is truncated towards zero, like the
// SystemVerilog '/' operator, and saturated to the 32-bit signed range; a
// zero divisor gives the saturated value with the dividend's sign. Used for
// the mean (sum / N), the mean of squares and gamma / sigma. The paper names
// a division unit; its algorithm is this design's choice.
module fx_divider
  import ode_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  acc_t num,
  input  q20_t den,
  output logic busy,
  output logic done,
  output q20_t quot
);
  logic [ACC_W-1:0]  q;      // dividend shifting out / quotient shifting in
  logic [DATA_W:0]   rem;    // partial remainder, one bit wider than divisor
  logic [DATA_W-1:0] d;      // |den|
  logic              neg;
  logic [6:0]        cnt;
  logic              fin;

  logic [DATA_W+1:0] trial;
  logic [DATA_W:0]   rem_sh;
  always_comb begin
    rem_sh = {rem[DATA_W-1:0], q[ACC_W-1]};
    trial  = {1'b0, rem_sh} - {2'b00, d};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q <= '0; rem <= '0; d <= '0; neg <= 1'b0; cnt <= '0;
      busy <= 1'b0; fin <= 1'b0; done <= 1'b0; quot <= '0;
    end else begin
      done <= 1'b0;
      fin  <= 1'b0;
      if (start && !busy && !fin) begin
        q    <= num[ACC_W-1] ? ACC_W'(-num) : num;
        d    <= den[DATA_W-1] ? DATA_W'(-den) : den;
        neg  <= num[ACC_W-1] ^ den[DATA_W-1];
        rem  <= '0;
        cnt  <= 7'd0;
        busy <= 1'b1;
      end else if (busy) begin
        if (!trial[DATA_W+1]) begin
          rem <= trial[DATA_W:0];
          q   <= {q[ACC_W-2:0], 1'b1};
        end else begin
          rem <= rem_sh;
          q   <= {q[ACC_W-2:0], 1'b0};
        end
        cnt <= cnt + 7'd1;
        if (cnt == 7'(ACC_W-1)) begin
          busy <= 1'b0;
          fin  <= 1'b1;
        end
      end else if (fin) begin
        if (d == '0)
          quot <= neg ? Q20_MIN : Q20_MAX;
        else if (neg)
          quot <= sat32(-acc_t'(q));
        else
          quot <= (q > ACC_W'(Q20_MAX)) ? Q20_MAX : q20_t'(q);
        done <= 1'b1;
      end
    end
  end
endmodule
