// tb_rscl_pe: checks the f/g processing element against the max-log f and g
// equations on random signed inputs, both values of usum and both modes.
module tb_rscl_pe;
  localparam int QM = 13;
  logic signed [QM-1:0] a0, a1, b0, b1, o0, o1;
  logic usum;
  rscl_pkg::pe_mode_e ctrl;
  int checks = 0, failures = 0;

  rscl_pe #(.QM(QM)) dut (.*);

  function automatic int mx(int x, int y); return (x > y) ? x : y; endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 4000; n++) begin
      int ia0, ia1, ib0, ib1, e0, e1;
      ia0 = $signed($urandom_range(0, 2000)) - 1000;
      ia1 = $signed($urandom_range(0, 2000)) - 1000;
      ib0 = $signed($urandom_range(0, 2000)) - 1000;
      ib1 = $signed($urandom_range(0, 2000)) - 1000;
      a0 = QM'(ia0); a1 = QM'(ia1); b0 = QM'(ib0); b1 = QM'(ib1);
      usum = 1'($urandom);
      ctrl = rscl_pkg::pe_mode_e'($urandom % 2);
      #1;
      if (ctrl == rscl_pkg::PE_F) begin
        e0 = mx(ia0 + ib0, ia1 + ib1);
        e1 = mx(ia0 + ib1, ia1 + ib0);
      end else begin
        e0 = (usum ? ia1 : ia0) + ib0;
        e1 = (usum ? ia0 : ia1) + ib1;
      end
      checks++;
      if (int'(o0) != e0 || int'(o1) != e1) begin
        failures++;
        if (failures < 5) $display("mismatch mode=%0d usum=%0d got %0d %0d exp %0d %0d", ctrl, usum, o0, o1, e0, e1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
