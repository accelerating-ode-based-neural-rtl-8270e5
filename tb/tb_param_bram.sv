// tb_param_bram: writes every weight by its flat host index and checks that
// it appears in bank oc % P at conv*(C/P)*C*9 + (oc/P)*C*9 + ic*9 + k; also
// writes and reads the BN parameter array. Small sizes.
module tb_param_bram;
  import ode_pkg::*;
  localparam int C = 4, P = 2;
  localparam int WDEPTH = 2*(C/P)*C*9, WAW = $clog2(WDEPTH), WIDXW = $clog2(2*C*C*9);
  localparam int BAW = $clog2(4*C);
  logic clk = 0, w_we = 0, bn_we = 0;
  logic [WIDXW-1:0] w_idx = 0;
  q20_t w_data = 0, bn_wdata = 0, bn_rd_data;
  logic [BAW-1:0] bn_widx = 0, bn_rd_idx = 0;
  logic [WAW-1:0] w_rd_addr = 0;
  q20_t w_rd_data [P];
  int checks = 0, failures = 0;
  int wt [2*C*C*9];
  int bnv [4*C];

  param_bram #(.C(C), .P(P)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    for (int i = 0; i < 2*C*C*9; i++) begin
      @(negedge clk); w_we = 1; w_idx = WIDXW'(i); w_data = q20_t'($urandom); wt[i] = w_data;
    end
    for (int i = 0; i < 4*C; i++) begin
      @(negedge clk); w_we = 0; bn_we = 1; bn_widx = BAW'(i); bn_wdata = q20_t'($urandom); bnv[i] = bn_wdata;
    end
    @(negedge clk); bn_we = 0;
    for (int cv = 0; cv < 2; cv++)
      for (int g = 0; g < C/P; g++)
        for (int r = 0; r < C*9; r++) begin
          w_rd_addr = WAW'(cv*(C/P)*C*9 + g*C*9 + r);
          @(posedge clk); #1;
          for (int b = 0; b < P; b++) begin
            checks++;
            if (w_rd_data[b] !== wt[cv*C*C*9 + (g*P+b)*C*9 + r]) failures++;
          end
          @(negedge clk);
        end
    for (int i = 0; i < 4*C; i++) begin
      bn_rd_idx = BAW'(i);
      @(posedge clk); #1;
      checks++;
      if (bn_rd_data !== bnv[i]) failures++;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
