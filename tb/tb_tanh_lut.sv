// tb_tanh_lut: checks all 128 table inputs against round(256*tanh(L/2)),
// L = input/4, computed with real arithmetic.
module tb_tanh_lut;
  import lama_ref_pkg::*;
  logic signed [6:0] llr;
  logic signed [9:0] t;
  int checks = 0, failures = 0;

  tanh_lut dut (.llr_i(llr), .t_o(t));

  initial begin
    for (int i = -64; i < 64; i++) begin
      real r;
      int  e;
      llr = 7'(i);
      #1;
      r = 256.0 * rtanh(i / 8.0);
      e = (r >= 0.0) ? $rtoi(r + 0.5) : -$rtoi(-r + 0.5);
      checks++;
      if (int'(t) != e) begin
        failures++;
        $display("FAIL llr=%0d t=%0d expected %0d", i, t, e);
      end
    end
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
