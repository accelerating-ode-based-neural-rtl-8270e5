// tb_fx_sqrt: floor(sqrt(x)) of random and corner radicands, checked by
// r*r <= x < (r+1)*(r+1); checks the 34-cycle latency from start to done.
module tb_fx_sqrt;
  import ode_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [63:0] x = 0;
  logic [31:0] root;
  int checks = 0, failures = 0;

  fx_sqrt dut (.*);
  always #5 clk = ~clk;

  task automatic run(input logic [63:0] v);
    int lat;
    logic [64:0] r, r1;
    @(negedge clk); x = v; start = 1;
    @(negedge clk); start = 0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    r  = 65'(root);
    r1 = r + 1;
    checks++;
    if (!((r * r <= 65'(v)) && (r1 * r1 > 65'(v)))) begin
      failures++;
      if (failures < 8) $display("sqrt mismatch x=%0d root=%0d", v, root);
    end
    checks++;
    if (lat != 34) begin
      failures++;
      if (failures < 8) $display("sqrt latency %0d", lat);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(0); run(1); run(2); run(3); run(4); run(99); run(100);
    run(64'd10 << 20); run(64'hffff_ffff_ffff_ffff); run(64'h4000_0000_0000_0000);
    for (int i = 0; i < 300; i++) run({$urandom, $urandom} >> ($urandom % 64));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
