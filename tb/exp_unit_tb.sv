// exp_unit_tb: exhaustive check of the fixed-point exponential over every
// <16,6> input against exp() computed in real arithmetic, within 0.5% or
// 3 LSB; inputs whose exponential exceeds the format must give the largest
// value. Also checks exp(0) = 1 exactly. Combinational.
module exp_unit_tb;
  import lfads_ref_pkg::*;
  int checks = 0, failures = 0, n_sat = 0;
  logic signed [15:0] x, y;

  exp_unit #(.DW(16), .DI(6)) dut (.x(x), .y(y));

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -32768; v < 32768; v++) begin
      x = 16'(v);
      #1;
      checks++;
      if (!exp_ok(longint'(v), longint'(y), 10, 16)) begin
        failures++;
        if (failures < 10) $display("FAIL x=%0d y=%0d exp=%f", v, y, $exp(real'(v)/1024.0)*1024.0);
      end
      if (y == 16'sh7fff) n_sat++;
    end
    x = 0; #1; checks++; if (y != 16'sd1024) failures++;
    checks++; if (n_sat == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
