// tb_fx_divider: signed divisions with random and corner operands, compared
// with the '/' operator (truncation towards zero) plus saturation; checks the
// 66-cycle latency from start to done.
module tb_fx_divider;
  import ode_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  acc_t num = 0;
  q20_t den = 1, quot;
  int checks = 0, failures = 0;

  fx_divider dut (.*);
  always #5 clk = ~clk;

  function automatic q20_t model(input longint n, input longint d);
    longint q;
    if (d == 0) return (n < 0) ? 32'sh80000000 : 32'sh7fffffff;
    q = n / d;
    if (q > 64'sd2147483647) return 32'sh7fffffff;
    if (q < -64'sd2147483648) return 32'sh80000000;
    return q20_t'(q);
  endfunction

  task automatic run(input acc_t n, input q20_t d);
    int lat = 0;
    @(negedge clk); num = n; den = d; start = 1;
    @(negedge clk); start = 0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    checks++;
    if (quot !== model(n, d)) begin
      failures++;
      if (failures < 8) $display("div mismatch %0d / %0d = %0d exp %0d", n, d, quot, model(n, d));
    end
    checks++;
    if (lat != 66) begin
      failures++;
      if (failures < 8) $display("div latency %0d", lat);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(100, 7); run(-100, 7); run(100, -7); run(-100, -7);
    run(64'sd1 <<< 40, 3); run(5, 0); run(-5, 0); run(0, 9);
    run(-64'sd9223372036854775807 - 1, 1);
    run(64'sd1 <<< 52, 32'sh7fffffff);
    run(64'sd300, 32'sh80000000);
    for (int i = 0; i < 300; i++) begin
      acc_t n = {$urandom, $urandom} >>> ($urandom % 64);
      q20_t d = q20_t'($urandom) >>> ($urandom % 31);
      run(n, d);
    end
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
