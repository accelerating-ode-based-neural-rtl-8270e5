// tb_bn_unit: batch normalisation of a small map (C=4, 4x4, P=2) in both
// modes against the reference model: BN + ReLU with parameter set 0, then
// BN + Euler update with parameter set 1 and h = 0.25. One channel is
// constant, so its variance is zero and only epsilon keeps sigma non-zero.
module tb_bn_unit;
  import ode_pkg::*;
  import ode_ref_pkg::*;
  localparam int C = 4, H = 4, W = 4, P = 2, HW = H*W;
  localparam int FAW = $clog2((C/P)*HW), BAW = $clog2(4*C);

  logic clk = 0, rst_n = 0, start = 0, bn_sel = 0, relu_en = 0, euler_en = 0, busy, done;
  q20_t h = 0;
  logic [FAW-1:0] src_addr, dst_addr, tb_addr = 0;
  q20_t src_data [P], z_data [P], dst_data [P], tb_wd [P];
  logic [P-1:0] dst_mask, tb_wm = 0;
  logic [BAW-1:0] prm_idx;
  q20_t prm_data;
  logic tb_own = 1, bn_we = 0, tb_to_z = 0;
  logic [BAW-1:0] bn_widx = 0;
  q20_t bn_wdata = 0;

  int checks = 0, failures = 0, clamps = 0;
  int x [], z [], gb [], gb_all [], y [];
  int cR, hwR;   // run-time copies of the sizes for the reference model

  always #5 clk = ~clk;

  // buffer under normalisation: loaded and read back by the testbench
  logic [FAW-1:0] x_ra, x_wa;
  logic [P-1:0]   x_wm;
  q20_t           x_wd [P];
  always_comb begin
    x_ra = tb_own ? tb_addr : src_addr;
    x_wa = tb_own ? tb_addr : dst_addr;
    x_wm = tb_own ? (tb_to_z ? '0 : tb_wm) : dst_mask;
    for (int b = 0; b < P; b++) x_wd[b] = tb_own ? tb_wd[b] : dst_data[b];
  end
  fmap_bram #(.C(C), .H(H), .W(W), .P(P)) u_x (
    .clk, .rd_addr(x_ra), .rd_data(src_data), .wr_mask(x_wm), .wr_addr(x_wa), .wr_data(x_wd));
  fmap_bram #(.C(C), .H(H), .W(W), .P(P)) u_z (
    .clk, .rd_addr(tb_own ? tb_addr : src_addr), .rd_data(z_data), .wr_mask((tb_own && tb_to_z) ? tb_wm : '0),
    .wr_addr(tb_addr), .wr_data(tb_wd));
  logic [$clog2(2*C*C*9)-1:0] w_idx0 = '0;
  logic [$clog2(2*(C/P)*C*9)-1:0] w_ra0 = '0;
  q20_t w_rd_unused [P];
  param_bram #(.C(C), .P(P)) u_prm (
    .clk, .w_we(1'b0), .w_idx(w_idx0), .w_data('0), .bn_we, .bn_widx, .bn_wdata,
    .w_rd_addr(w_ra0), .w_rd_data(w_rd_unused), .bn_rd_idx(prm_idx), .bn_rd_data(prm_data));

  bn_unit #(.C(C), .H(H), .W(W), .P(P)) dut (.*);

  task automatic load(ref int v [], input logic to_z);
    tb_to_z = to_z;
    for (int c = 0; c < C; c++)
      for (int p = 0; p < HW; p++) begin
        @(negedge clk);
        tb_addr = FAW'((c/P)*HW + p);
        tb_wm = '0; tb_wm[c%P] = 1'b1;
        tb_wd[c%P] = v[c*HW+p];
        tb_wd[(c+1)%P] = v[c*HW+p];
      end
    @(negedge clk); tb_wm = '0;
  endtask

  task automatic run_and_check(input int sel, input logic r, input logic e, input q20_t hh);
    int cyc = 0, bound;
    @(negedge clk); tb_own = 0; bn_sel = sel[0]; relu_en = r; euler_en = e; h = hh; start = 1;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    tb_own = 1;
    // per channel: 2 passes over H*W plus 3 divisions (66) and a root (34)
    bound = C * (2*HW + 3*66 + 34 + 16);
    checks++;
    if (cyc > bound) begin failures++; $display("bn took %0d cycles > %0d", cyc, bound); end
    for (int i = 0; i < 2*C; i++) gb[i] = gb_all[sel*2*C + i];
    clamps += ref_bn(cR, hwR, x, gb, r, e, z, hh, y);
    for (int c = 0; c < C; c++)
      for (int p = 0; p < HW; p++) begin
        tb_addr = FAW'((c/P)*HW + p);
        @(posedge clk); #1;
        checks++;
        if (src_data[c%P] !== y[c*HW+p]) begin
          failures++;
          if (failures < 6) $display("bn sel%0d ch %0d pix %0d: %0d exp %0d", sel, c, p, src_data[c%P], y[c*HW+p]);
        end
        @(negedge clk);
      end
  endtask

  initial begin
    cR = C; hwR = HW;
    x = new[C*HW]; z = new[C*HW]; y = new[C*HW]; gb = new[2*C]; gb_all = new[4*C];
    for (int b = 0; b < P; b++) tb_wd[b] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 4*C; i++) begin
      gb_all[i] = (i % (2*C) < C) ? int'($urandom % (1 << 21)) + (1 << 18)     // gamma 0.25..2.25
                                  : int'($urandom % (1 << 21)) - (1 << 20);    // beta  -1..1
      @(negedge clk); bn_we = 1; bn_widx = BAW'(i); bn_wdata = gb_all[i];
    end
    @(negedge clk); bn_we = 0;
    for (int i = 0; i < C*HW; i++) begin
      x[i] = int'($urandom % (1 << 23)) - (1 << 22);
      z[i] = int'($urandom % (1 << 22)) - (1 << 21);
    end
    for (int p = 0; p < HW; p++) x[2*HW+p] = 32'sh0003_0000;   // constant channel
    load(x, 0);
    load(z, 1);
    run_and_check(0, 1, 0, 0);
    checks++;
    if (clamps == 0) begin failures++; $display("ReLU never clamped"); end
    for (int i = 0; i < C*HW; i++) x[i] = int'($urandom % (1 << 23)) - (1 << 22);
    load(x, 0);
    run_and_check(1, 0, 1, 32'sh0004_0000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
