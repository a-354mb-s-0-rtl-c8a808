// tb_nr_recip: reciprocal of x over the whole input range (random
// mantissas at every exponent, plus powers of two and x = 0) against real
// division; relative error below 0.1 % or one output LSB, saturation above
// the output range.
module tb_nr_recip;
  import lama_pkg::*;
  xval_t x;
  rho_t  y;
  int checks = 0, failures = 0;

  nr_recip dut (.x_i(x), .y_o(y));

  task automatic one(input xval_t v);
    real e, got;
    x = v;
    #1;
    checks++;
    if (v == 0) e = 16777215.0;
    else begin
      e = 65536.0 / real'(v) * 256.0;
      if (e > 16777215.0) e = 16777215.0;
    end
    got = real'(y);
    if (got > e * 1.001 + 1.0 || got < e * 0.999 - 1.0) begin
      failures++;
      if (failures < 10) $display("FAIL x=%0d y=%0d exp %f", v, y, e);
    end
  endtask

  initial begin
    one('0);
    for (int p = 0; p < 32; p++) begin
      one(xval_t'(1) << p);
      for (int n = 0; n < 200; n++) one((xval_t'(1) << p) | (xval_t'($urandom) & ((xval_t'(1) << p) - 1)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
