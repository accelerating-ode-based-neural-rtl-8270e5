// tb_mac_unit: random multiply-accumulate sequences against a longint model.
module tb_mac_unit;
  import ode_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, first = 0;
  q20_t a = 0, b = 0;
  acc_t acc;
  int checks = 0, failures = 0;
  longint model = 0;

  mac_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      en    = ($urandom % 4) != 0;
      first = ($urandom % 8) == 0;
      a     = q20_t'($urandom);
      b     = q20_t'($urandom);
      if (en) model = first ? longint'(a) * longint'(b) : model + longint'(a) * longint'(b);
      @(posedge clk); #1;
      checks++;
      if (acc !== model) begin
        failures++;
        if (failures < 5) $display("mismatch %0d: acc=%0d model=%0d", i, acc, model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
