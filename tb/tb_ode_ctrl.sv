// tb_ode_ctrl: the controller against responder models of the convolution
// and BN units (done after a random delay). Checks the step order and the
// select/enable flags of each step, the R -> z copy (every address once,
// between iterations only), the iteration count, the reported cycle count
// and the M = 0 and M = 1 cases.
module tb_ode_ctrl;
  import ode_pkg::*;
  localparam int C = 8, H = 2, W = 2, P = 4, DEPTH = (C/P)*H*W, FAW = $clog2(DEPTH);
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [15:0] iters = 0, iter;
  logic [31:0] cycles;
  phase_e phase;
  logic conv_start, conv_sel, conv_done = 0, bn_start, bn_sel, relu_en, euler_en, bn_done = 0;
  logic [FAW-1:0] cp_rd_addr, cp_wr_addr;
  logic cp_we;
  int checks = 0, failures = 0;
  string trace;

  ode_ctrl #(.C(C), .H(H), .W(W), .P(P)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // responders
  always @(posedge clk) begin
    if (conv_start) begin
      trace = {trace, conv_sel ? "C2 " : "C1 "};
      fork begin
        repeat (2 + $urandom % 5) @(posedge clk);
        conv_done <= 1; @(posedge clk); conv_done <= 0;
      end join_none
    end
    if (bn_start) begin
      trace = {trace, bn_sel ? "B2" : "B1", relu_en ? "r" : "", euler_en ? "e " : " "};
      fork begin
        repeat (2 + $urandom % 5) @(posedge clk);
        bn_done <= 1; @(posedge clk); bn_done <= 0;
      end join_none
    end
  end

  // copy monitor: the write of address a follows the read of a by one cycle
  int copy_writes = 0, copy_err = 0;
  logic [FAW-1:0] last_rd;
  logic last_copy;
  always @(posedge clk) begin
    last_rd   <= cp_rd_addr;
    last_copy <= (phase == PH_COPY);
    if (cp_we) begin
      copy_writes++;
      if (!last_copy || cp_wr_addr != last_rd) copy_err++;
    end
  end

  task automatic run(input int m, input string exp_trace);
    int cyc;
    trace = ""; copy_writes = 0; copy_err = 0;
    @(negedge clk); iters = 16'(m); start = 1;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    chk(trace == exp_trace, $sformatf("M=%0d trace '%s' expected '%s'", m, trace, exp_trace));
    chk(copy_writes == ((m > 1) ? (m - 1) * DEPTH : 0), $sformatf("copy writes %0d", copy_writes));
    chk(copy_err == 0, "copy address/phase");
    chk(m == 0 || iter == 16'(m - 1), $sformatf("final iter %0d", iter));
    chk(cycles == 32'(cyc), $sformatf("cycles %0d measured %0d", cycles, cyc));
    @(negedge clk);
    chk(!busy, "idle after done");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(1, "C1 B1r C2 B2e ");
    run(3, "C1 B1r C2 B2e C1 B1r C2 B2e C1 B1r C2 B2e ");
    run(0, "");
    run(2, "C1 B1r C2 B2e C1 B1r C2 B2e ");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
