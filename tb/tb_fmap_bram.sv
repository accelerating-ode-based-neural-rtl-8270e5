// tb_fmap_bram: single-bank and all-bank writes, then read-back of every bank
// against a flat model, with one-cycle read latency. Small sizes.
module tb_fmap_bram;
  import ode_pkg::*;
  localparam int C = 8, H = 2, W = 3, P = 4, DEPTH = (C/P)*H*W, AW = $clog2(DEPTH);
  logic clk = 0;
  logic [AW-1:0] rd_addr = 0, wr_addr = 0;
  logic [P-1:0]  wr_mask = 0;
  q20_t rd_data [P], wr_data [P];
  int checks = 0, failures = 0;
  q20_t model [P][DEPTH];

  fmap_bram #(.C(C), .H(H), .W(W), .P(P)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    for (int b = 0; b < P; b++) wr_data[b] = 0;
    // fill every bank with a full-width write
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      wr_addr = AW'(a); wr_mask = '1;
      for (int b = 0; b < P; b++) begin wr_data[b] = q20_t'($urandom); model[b][a] = wr_data[b]; end
    end
    // random single-bank overwrites
    for (int i = 0; i < 40; i++) begin
      int b = $urandom % P, a = $urandom % DEPTH;
      @(negedge clk);
      wr_addr = AW'(a); wr_mask = '0; wr_mask[b] = 1'b1;
      for (int k = 0; k < P; k++) wr_data[k] = q20_t'($urandom);
      model[b][a] = wr_data[b];
    end
    @(negedge clk); wr_mask = '0;
    for (int a = 0; a < DEPTH; a++) begin
      rd_addr = AW'(a);
      @(posedge clk); #1;
      for (int b = 0; b < P; b++) begin
        checks++;
        if (rd_data[b] !== model[b][a]) begin
          failures++;
          $display("bank %0d addr %0d: %0d exp %0d", b, a, rd_data[b], model[b][a]);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
