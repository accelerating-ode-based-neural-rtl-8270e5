// tb_euler_update: z + h*f against a longint model, including saturation.
module tb_euler_update;
  import ode_pkg::*;
  logic en;
  q20_t z, h, f, y;
  int checks = 0, failures = 0;
  euler_update dut (.*);

  function automatic q20_t model(input logic e, input q20_t zz, input q20_t hh, input q20_t ff);
    longint s;
    if (!e) return ff;
    s = longint'(zz) + ((longint'(hh) * longint'(ff)) >>> 20);
    if (s > 64'sd2147483647) return 32'sh7fffffff;
    if (s < -64'sd2147483648) return 32'sh80000000;
    return q20_t'(s);
  endfunction

  task automatic chk(input logic e, input q20_t zz, input q20_t hh, input q20_t ff);
    en = e; z = zz; h = hh; f = ff; #1;
    checks++;
    if (y !== model(e, zz, hh, ff)) begin
      failures++;
      $display("euler mismatch z=%0d h=%0d f=%0d y=%0d", zz, hh, ff, y);
    end
  endtask

  initial begin
    // z = 1.0, h = 0.5, f = 2.0 -> 2.0
    chk(1, 32'sh0010_0000, 32'sh0008_0000, 32'sh0020_0000);
    checks++; if (y !== 32'sh0020_0000) failures++;
    chk(1, 32'sh7ff0_0000, 32'sh0010_0000, 32'sh0100_0000);   // saturates high
    chk(1, 32'sh8010_0000, 32'sh0010_0000, 32'shff00_0000);   // saturates low
    chk(0, 32'sh0010_0000, 32'sh0008_0000, 32'sh0020_0000);
    for (int i = 0; i < 2000; i++)
      chk(1'($urandom), q20_t'($urandom), q20_t'($urandom) >>> ($urandom % 16),
          q20_t'($urandom) >>> ($urandom % 16));
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
