// hard_sigmoid_tb: exhaustive check of the quantised hard sigmoid in the
// <16,6> data format and in a narrow <8,3> format against
// clip(x/2 + 1/2, 0, 1 - 2^-DF) from the reference model. It also checks the
// two clamp levels are reached. Combinational, so no cycle count applies.
module hard_sigmoid_tb;
  import lfads_ref_pkg::*;
  int checks = 0, failures = 0;
  int n_lo = 0, n_hi = 0;

  logic signed [15:0] x16, y16;
  logic signed [7:0]  x8, y8;

  hard_sigmoid #(.DW(16), .DI(6)) dut16 (.x(x16), .y(y16));
  hard_sigmoid #(.DW(8),  .DI(3)) dut8  (.x(x8),  .y(y8));

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -32768; v < 32768; v++) begin
      x16 = 16'(v);
      #1;
      checks++;
      if (longint'(y16) != hsig(longint'(v), 10)) begin
        failures++;
        if (failures < 10) $display("FAIL 16b x=%0d y=%0d exp=%0d", v, y16, hsig(longint'(v), 10));
      end
      if (y16 == 0) n_lo++;
      if (y16 == 16'sd1023) n_hi++;
    end
    for (int v = -128; v < 128; v++) begin
      x8 = 8'(v);
      #1;
      checks++;
      if (longint'(y8) != hsig(longint'(v), 5)) begin
        failures++;
        if (failures < 10) $display("FAIL 8b x=%0d y=%0d exp=%0d", v, y8, hsig(longint'(v), 5));
      end
    end
    // the curve passes 0.5 at x = 0 and clamps at both ends
    x16 = 16'sd0; #1; checks++; if (y16 != 16'sd512) failures++;
    checks++; if (n_lo == 0 || n_hi == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
