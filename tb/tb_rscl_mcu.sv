// tb_rscl_mcu: checks the metric computation unit for K = 2 against the
// written-out 4-bit formula a1(x1^x2^x3^x4)+a2(x2^x4)+b1(x3^x4)+b2(x4) and
// for K = 1 against P(00)=a0+b0, P(01)=a1+b1, P(10)=a1+b0, P(11)=a0+b1.
module tb_rscl_mcu;
  localparam int QM = 13;
  logic signed [QM-1:0] ll2 [4][2];
  logic signed [QM-1:0] p2  [16];
  logic signed [QM-1:0] ll1 [2][2];
  logic signed [QM-1:0] p1  [4];
  int checks = 0, failures = 0;

  rscl_mcu #(.K(2), .QM(QM)) dut2 (.ll(ll2), .p(p2));
  rscl_mcu #(.K(1), .QM(QM)) dut1 (.ll(ll1), .p(p1));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 500; n++) begin
      int v [4][2];
      for (int j = 0; j < 4; j++)
        for (int b = 0; b < 2; b++) begin
          v[j][b] = $signed($urandom_range(0, 600)) - 300;
          ll2[j][b] = QM'(v[j][b]);
          if (j < 2) ll1[j][b] = QM'(v[j][b]);
        end
      #1;
      for (int c = 0; c < 16; c++) begin
        int x1, x2, x3, x4, e;
        x1 = (c >> 3) & 1; x2 = (c >> 2) & 1; x3 = (c >> 1) & 1; x4 = c & 1;
        e = v[0][x1 ^ x2 ^ x3 ^ x4] + v[1][x2 ^ x4] + v[2][x3 ^ x4] + v[3][x4];
        checks++;
        if (int'(p2[c]) != e) begin
          failures++;
          if (failures < 5) $display("K=2 c=%0d got %0d exp %0d", c, p2[c], e);
        end
      end
      begin
        int e1 [4];
        e1[0] = v[0][0] + v[1][0];
        e1[1] = v[0][1] + v[1][1];
        e1[2] = v[0][1] + v[1][0];
        e1[3] = v[0][0] + v[1][1];
        for (int c = 0; c < 4; c++) begin
          checks++;
          if (int'(p1[c]) != e1[c]) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
