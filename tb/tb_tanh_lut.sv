// tb_tanh_lut: sweeps the argument over and beyond the table range and compares
// the table with 2^32 (1 + tanh(x)) / 2 computed with $exp (saturated at
// x = -8 and 7.875). Also checks monotonicity and the value at x = 0.
module tb_tanh_lut;
  import tb_ref_pkg::*;
  logic signed [16:0] x;
  logic [31:0] p, prev;
  int checks = 0, failures = 0;

  tanh_lut #(.XW(17)) dut (.x, .p);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint e, d;
    prev = 0;
    for (int v = -200; v <= 200; v++) begin
      x = 17'(v);
      #1;
      e = act_ref(v);
      d = longint'(p) - e;
      checks++;
      if (d > 2 || d < -2) begin
        failures++;
        if (failures < 5) $display("x=%0d p=%0d expected %0d", v, p, e);
      end
      checks++;
      if (p < prev) failures++;
      prev = p;
    end
    x = 0; #1;
    checks++;
    if (p != 32'h8000_0000) begin failures++; $display("p(0)=%h", p); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
