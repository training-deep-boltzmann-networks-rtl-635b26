// tb_mac_unit: random neighbour states, weights and biases (including the
// extreme values -512 and 511) against the sum computed in the testbench.
module tb_mac_unit;
  localparam int DEG = 15;
  logic [DEG-1:0] m_nbr;
  logic signed [9:0] j_w [DEG];
  logic signed [9:0] h;
  logic signed [13:0] field;
  int checks = 0, failures = 0;

  mac_unit #(.DEG(DEG), .WW(10), .IW(14)) dut (.m_nbr, .j_w, .h, .field);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e;
    for (int n = 0; n < 3000; n++) begin
      m_nbr = DEG'($urandom);
      for (int k = 0; k < DEG; k++) begin
        case (n % 3)
          0: j_w[k] = 10'($urandom);
          1: j_w[k] = -10'sd512;
          default: j_w[k] = 10'sd511;
        endcase
      end
      h = (n % 3 == 1) ? -10'sd512 : 10'($urandom);
      if (n % 3 != 0) m_nbr = '1;
      #1;
      e = int'(h);
      for (int k = 0; k < DEG; k++) if (m_nbr[k]) e += int'(j_w[k]);
      checks++;
      if (int'(field) != e) begin
        failures++;
        if (failures < 5) $display("field %0d expected %0d", field, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
