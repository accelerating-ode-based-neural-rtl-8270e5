// tb_relu: ReLU on random and corner values, enabled and disabled.
module tb_relu;
  import ode_pkg::*;
  logic en;
  q20_t x, y;
  int checks = 0, failures = 0;
  relu dut (.*);

  task automatic chk(input logic e, input q20_t v);
    q20_t exp_y;
    en = e; x = v; #1;
    exp_y = (e && v[31]) ? 0 : v;
    checks++;
    if (y !== exp_y) begin
      failures++;
      $display("relu mismatch en=%0b x=%0d y=%0d", e, v, y);
    end
  endtask

  initial begin
    chk(1, 0); chk(1, -1); chk(1, 1); chk(1, Q20_MIN); chk(1, Q20_MAX);
    chk(0, -5); chk(0, Q20_MIN);
    for (int i = 0; i < 1000; i++) chk(1'($urandom), q20_t'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
