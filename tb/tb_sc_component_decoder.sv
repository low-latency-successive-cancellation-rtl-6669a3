// tb_sc_component_decoder: N = 32, K = 2 (three f/g stages). Random channel,
// stage memory and partial sums; every stage's outputs are checked against
// the f or g equation applied to the right operands of the heap layout.
module tb_sc_component_decoder;
  localparam int N = 32, K = 2, QM = 10, M = 5, D = M - K;
  logic signed [QM-1:0] ch [N][2], mem [N][2], wr [N][2];
  logic [N-1:0] ps;
  rscl_pkg::pe_mode_e ctrl;
  int checks = 0, failures = 0;

  sc_component_decoder #(.N(N), .K(K), .QM(QM)) dut (.*);

  function automatic int mx(int x, int y); return (x > y) ? x : y; endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 300; n++) begin
      for (int i = 0; i < N; i++)
        for (int b = 0; b < 2; b++) begin
          ch[i][b]  = QM'($signed($urandom_range(0, 6)) - 3);
          mem[i][b] = QM'($signed($urandom_range(0, 60)) - 30);
        end
      ps   = N'({$urandom, $urandom});
      ctrl = rscl_pkg::pe_mode_e'(n % 2);
      #1;
      for (int s = 1; s <= D; s++) begin
        int half;
        half = N >> s;
        for (int j = 0; j < half; j++) begin
          int a [2], b [2], e [2];
          for (int q = 0; q < 2; q++) begin
            a[q] = (s == 1) ? int'(ch[j][q])        : int'(mem[2*half + j][q]);
            b[q] = (s == 1) ? int'(ch[j + half][q]) : int'(mem[3*half + j][q]);
          end
          if (ctrl == rscl_pkg::PE_F) begin
            e[0] = mx(a[0] + b[0], a[1] + b[1]);
            e[1] = mx(a[0] + b[1], a[1] + b[0]);
          end else begin
            e[0] = a[ps[half + j]] + b[0];
            e[1] = a[1 - ps[half + j]] + b[1];
          end
          checks++;
          if (int'(wr[half + j][0]) != e[0] || int'(wr[half + j][1]) != e[1]) begin
            failures++;
            if (failures < 5) $display("stage %0d j %0d mismatch", s, j);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
