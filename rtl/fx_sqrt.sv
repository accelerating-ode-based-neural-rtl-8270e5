// fx_sqrt: the square-root unit of the batch-normalisation steps.
//
// Sequential digit-by-digit integer square root: root = floor(sqrt(x)) for a
// 64-bit unsigned radicand, one result bit per cycle. start (while idle)
// loads x; done pulses for one cycle 33 cycles later with root valid until
// the next start. For a Q20 variance v the caller passes x = v << 20, so the
// root is the Q20 standard deviation. The paper names a square root unit; the
// algorithm is this design's choice.
module fx_sqrt
  import ode_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ACC_W-1:0]  x,
  output logic              busy,
  output logic              done,
  output logic [DATA_W-1:0] root
);
  logic [ACC_W-1:0] num, res, bitv;
  logic [ACC_W-1:0] cand;
  assign cand = res + bitv;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      num <= '0; res <= '0; bitv <= '0; busy <= 1'b0; done <= 1'b0; root <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        num  <= x;
        res  <= '0;
        bitv <= ACC_W'(1) << (ACC_W-2);
        busy <= 1'b1;
      end else if (busy) begin
        if (bitv == '0) begin
          busy <= 1'b0;
          done <= 1'b1;
          root <= res[DATA_W-1:0];
        end else begin
          if (num >= cand) begin
            num <= num - cand;
            res <= (res >> 1) + bitv;
          end else begin
            res <= res >> 1;
          end
          bitv <= bitv >> 2;
        end
      end
    end
  end
endmodule
