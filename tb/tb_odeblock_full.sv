// tb_odeblock_full: end-to-end test of the ODEBlock at its default size,
// the layer3_2 configuration (C=64 channels, 8x8 map, P=16 lanes), with the
// top instantiated without overrides. The host port loads z, both weight
// sets (2 x 64 x 64 x 9 words) and the BN parameters, runs M = 6 Euler steps (layer3_2 of rODENet-3 with N = 20)
// with h = 0.5, and the result is compared word by word with the reference
// model. Also checks the cycle count, that host writes during a run are
// ignored, and that each mechanism (Euler iteration, result-to-input copy,
// ReLU clamping, host-write block) occurs.
module tb_odeblock_full;
  import ode_pkg::*;
  import ode_ref_pkg::*;
  localparam int C = 64, H = 8, W = 8, P = 16, M = 6;   // the top's defaults
  localparam int HW = H*W, OFFW = $clog2((2*C*C*9 > C*HW) ? 2*C*C*9 : C*HW), AW = OFFW + 2;
  localparam q20_t HSTEP = 32'sh0008_0000;   // 0.5

  logic clk = 0, rst_n = 0, host_we = 0, host_re = 0, start = 0, busy, done, host_rvalid;
  logic [AW-1:0] host_addr = 0;
  q20_t host_wdata = 0, host_rdata, h = HSTEP;
  logic [15:0] iters = 0, iter;
  logic [31:0] cycles;
  int checks = 0, failures = 0;
  int n_iter = 0, n_copy = 0, n_relu = 0, n_blocked = 0;
  int z [], t [], r [], wts [], gb [], g0 [], g1 [];

  odeblock_top dut (.*);
  always #5 clk = ~clk;

  task automatic hwrite(input region_e rg, input int off, input int v);
    @(negedge clk); host_we = 1; host_addr = {rg, OFFW'(off)}; host_wdata = v;
    @(negedge clk); host_we = 0;
  endtask
  task automatic hread(input region_e rg, input int off, output int v);
    @(negedge clk); host_re = 1; host_addr = {rg, OFFW'(off)};
    @(negedge clk); host_re = 0;
    v = host_rdata;
    if (!host_rvalid) begin failures++; $display("no rvalid"); end
  endtask

  // count phases entered
  phase_e last_ph = PH_IDLE;
  always @(posedge clk) if (rst_n) begin
    last_ph <= dut.phase;
    if (dut.phase == PH_COPY && last_ph != PH_COPY) n_copy++;
    if (dut.phase == PH_BN2 && last_ph != PH_BN2) n_iter++;
  end

  // run-time copies of the sizes, so the reference loops stay loops
  int nZ, nWt, nB, cR, hR, wR, hwR;
  initial begin
    int v, cyc, conv_cyc, hi;
    nZ = C*HW; nWt = 2*C*C*9; nB = 4*C; cR = C; hR = H; wR = W; hwR = HW;
    z = new[C*HW]; t = new[C*HW]; r = new[C*HW]; wts = new[2*C*C*9];
    gb = new[4*C]; g0 = new[2*C]; g1 = new[2*C];
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < nZ; i++) z[i] = int'($urandom % (1 << 22)) - (1 << 21);
    for (int i = 0; i < nWt; i++) wts[i] = int'($urandom % (1 << 18)) - (1 << 17);
    for (int i = 0; i < nB; i++)
      gb[i] = (i % (2*C) < C) ? int'($urandom % (1 << 20)) + (1 << 19)
                              : int'($urandom % (1 << 20)) - (1 << 19);
    for (int i = 0; i < 2*C; i++) begin g0[i] = gb[i]; g1[i] = gb[2*C + i]; end
    for (int i = 0; i < nZ; i++) hwrite(RG_Z, i, z[i]);
    for (int i = 0; i < nWt; i++) hwrite(RG_WEIGHT, i, wts[i]);
    for (int i = 0; i < nB; i++) hwrite(RG_BN, i, gb[i]);
    // read back z through the host port
    for (int i = 0; i < nZ; i += 5) begin
      hread(RG_Z, i, v);
      checks++;
      if (v !== z[i]) begin failures++; $display("z readback %0d: %0d exp %0d", i, v, z[i]); end
    end

    // run
    @(negedge clk); iters = 16'(M); start = 1;
    @(negedge clk); start = 0; cyc = 1;
    // a host write while busy must be ignored
    repeat (20) @(negedge clk);
    cyc += 20;
    host_we = 1; host_addr = {RG_Z, OFFW'(3)}; host_wdata = 32'sh1234_5678;
    @(negedge clk); host_we = 0; cyc++;
    while (!done) begin @(negedge clk); cyc++; end

    // reference
    for (int m = 0; m < M; m++) begin
      ref_conv(cR, hR, wR, 0, z, wts, t);
      n_relu += ref_bn(cR, hwR, t, g0, 1, 0, z, 0, t);
      ref_conv(cR, hR, wR, 1, t, wts, r);
      void'(ref_bn(cR, hwR, r, g1, 0, 1, z, HSTEP, r));
      if (m != M - 1) z = r;
    end

    for (int i = 0; i < nZ; i++) begin
      hread(RG_RESULT, i, v);
      checks++;
      if (v !== r[i]) begin
        failures++;
        if (failures < 6) $display("result %0d: %0d exp %0d", i, v, r[i]);
      end
    end
    hread(RG_Z, 3, v);
    checks++;
    if (v === 32'sh1234_5678) failures++; else n_blocked++;
    if (v !== z[3]) begin failures++; $display("z[3] after run: %0d exp %0d", v, z[3]); end

    // cycle count: 2 convolutions per step dominate; BN and copy add a bounded rest
    conv_cyc = (C/P)*HW*C*9 + 3;
    hi = M * (2*conv_cyc + 2*C*(2*HW + 260)) + (M-1) * ((C/P)*HW + 4) + 10;
    checks++;
    if (cycles != 32'(cyc) || cycles < 32'(2*M*conv_cyc) || cycles > 32'(hi)) begin
      failures++;
      $display("cycles %0d measured %0d, bounds %0d..%0d", cycles, cyc, 2*M*conv_cyc, hi);
    end
    $display("run: %0d cycles; iterations %0d, copies %0d, relu clamps %0d, blocked writes %0d",
             cycles, n_iter, n_copy, n_relu, n_blocked);
    checks++; if (n_iter != M)     begin failures++; $display("iterations %0d", n_iter); end
    checks++; if (n_copy != M - 1) begin failures++; $display("copies %0d", n_copy); end
    checks++; if (n_relu == 0)     begin failures++; $display("ReLU never clamped"); end
    checks++; if (n_blocked == 0)  begin failures++; $display("busy write not blocked"); end
    checks++; if (iter != 16'(M-1)) begin failures++; $display("iter %0d", iter); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
