// tb_conv_engine: both weight sets of a small convolution (C=8, 4x5 map,
// P=4 lanes) against the reference model, plus the cycle count
// (C/P)*H*W*C*9 + 3 from start to done. Uses the buffer and parameter BRAMs.
module tb_conv_engine;
  import ode_pkg::*;
  import ode_ref_pkg::*;
  localparam int C = 8, H = 4, W = 5, P = 4, HW = H*W;
  localparam int FAW = $clog2((C/P)*HW), WAW = $clog2(2*(C/P)*C*9), WIDXW = $clog2(2*C*C*9);
  localparam int BAW = $clog2(4*C);

  logic clk = 0, rst_n = 0, start = 0, conv_sel = 0, busy, done;
  logic [FAW-1:0] src_addr, dst_addr, s_wa = 0, d_ra = 0;
  q20_t src_data [P], dst_data [P], d_rd [P], s_wd [P];
  logic [P-1:0] dst_mask, s_wm = 0;
  logic [WAW-1:0] w_addr;
  q20_t w_data [P];
  logic w_we = 0;
  logic [WIDXW-1:0] w_idx = 0;
  q20_t w_wd = 0, bn_rd_data;

  int checks = 0, failures = 0;
  int zin [], wts [], exp_y [];
  int cR, hR, wR;   // run-time copies of the sizes for the reference model

  always #5 clk = ~clk;

  fmap_bram #(.C(C), .H(H), .W(W), .P(P)) u_src (
    .clk, .rd_addr(src_addr), .rd_data(src_data), .wr_mask(s_wm), .wr_addr(s_wa), .wr_data(s_wd));
  fmap_bram #(.C(C), .H(H), .W(W), .P(P)) u_dst (
    .clk, .rd_addr(d_ra), .rd_data(d_rd), .wr_mask(dst_mask), .wr_addr(dst_addr), .wr_data(dst_data));
  param_bram #(.C(C), .P(P)) u_prm (
    .clk, .w_we, .w_idx, .w_data(w_wd), .bn_we(1'b0), .bn_widx('0), .bn_wdata('0),
    .w_rd_addr(w_addr), .w_rd_data(w_data), .bn_rd_idx('0), .bn_rd_data);

  conv_engine #(.C(C), .H(H), .W(W), .P(P)) dut (.*);

  task automatic run_conv(input int sel);
    int cyc = 0;
    @(negedge clk); conv_sel = sel[0]; start = 1;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != (C/P)*HW*C*9 + 3) begin
      failures++;
      $display("conv cycles %0d, expected %0d", cyc, (C/P)*HW*C*9 + 3);
    end
    ref_conv(cR, hR, wR, sel, zin, wts, exp_y);
    @(negedge clk);
    for (int c = 0; c < C; c++)
      for (int p = 0; p < HW; p++) begin
        d_ra = FAW'((c/P)*HW + p);
        @(posedge clk); #1;
        checks++;
        if (d_rd[c%P] !== exp_y[c*HW+p]) begin
          failures++;
          if (failures < 6) $display("conv%0d ch %0d pix %0d: %0d exp %0d", sel, c, p, d_rd[c%P], exp_y[c*HW+p]);
        end
        @(negedge clk);
      end
  endtask

  initial begin
    cR = C; hR = H; wR = W;
    zin = new[C*HW]; wts = new[2*C*C*9]; exp_y = new[C*HW];
    for (int b = 0; b < P; b++) s_wd[b] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < C*HW; i++) zin[i] = int'($urandom % (1 << 22)) - (1 << 21);     // +-2.0
    for (int i = 0; i < 2*C*C*9; i++) wts[i] = int'($urandom % (1 << 18)) - (1 << 17);  // +-0.125
    zin[0] = 32'sh7fff_ffff;   // drive one output towards saturation
    for (int i = 0; i < 2*C*C*9; i++) begin
      @(negedge clk); w_we = 1; w_idx = WIDXW'(i); w_wd = wts[i];
    end
    @(negedge clk); w_we = 0;
    for (int c = 0; c < C; c++)
      for (int p = 0; p < HW; p++) begin
        @(negedge clk);
        s_wa = FAW'((c/P)*HW + p); s_wm = '0; s_wm[c%P] = 1'b1; s_wd[c%P] = zin[c*HW+p];
      end
    @(negedge clk); s_wm = '0;
    run_conv(0);
    run_conv(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
