// tb_rscl_zfu: checks zero forcing for K = 2: a candidate keeps its metric
// only if its slot is valid and it sets no frozen bit to 1; otherwise -Inf.
module tb_rscl_zfu;
  localparam int QM = 13;
  localparam logic signed [QM-1:0] NEG_INF = {1'b1, {(QM-1){1'b0}}};
  logic signed [QM-1:0] p [16], m [16];
  logic [3:0] info;
  logic path_valid;
  int checks = 0, failures = 0, forced = 0;

  rscl_zfu #(.K(2), .QM(QM)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 400; n++) begin
      for (int c = 0; c < 16; c++) p[c] = QM'($signed($urandom_range(0, 4000)) - 2000);
      info = 4'($urandom);
      path_valid = ($urandom % 8) != 0;
      #1;
      for (int c = 0; c < 16; c++) begin
        bit ok;
        ok = path_valid;
        // alpha_1 is the MSB of c; info[0] is the first bit of the group
        for (int q = 0; q < 4; q++)
          if (((c >> (3 - q)) & 1) && !info[q]) ok = 0;
        checks++;
        if (!ok) forced++;
        if (m[c] != (ok ? p[c] : NEG_INF)) begin
          failures++;
          if (failures < 5) $display("c=%0d info=%b valid=%0d got %0d", c, info, path_valid, m[c]);
        end
      end
    end
    if (forced == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
