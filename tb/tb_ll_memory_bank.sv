// tb_ll_memory_bank: N = 32, K = 2, L = 4, QCH = 3. Writes random in-range
// values stage by stage, applies random copy permutations (with repeated
// parents), and compares every read with a reference model. Also checks
// that the channel store sign-extends and that a stage write touches only
// its own stage.
module tb_ll_memory_bank;
  localparam int N = 32, K = 2, L = 4, QCH = 3, M = 5, QM = QCH + M, D = M - K;
  logic clk = 0, rst_n = 0;
  logic ch_we, we, copy_en;
  logic [7:0] stage;
  logic signed [QCH-1:0] ch_in [N][2];
  logic signed [QM-1:0] wr [L][N][2], ch_rd [N][2], rd [L][N][2];
  logic [1:0] parent [L];
  int ref_mem [L][N][2];
  int ref_ch [N][2];
  int checks = 0, failures = 0, copies = 0;

  ll_memory_bank #(.N(N), .K(K), .L(L), .QCH(QCH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    for (int i = 0; i < N; i++)
      for (int b = 0; b < 2; b++) begin
        checks++;
        if (int'(ch_rd[i][b]) != ref_ch[i][b]) failures++;
        for (int l = 0; l < L; l++)
          if (i >= 2**K) begin
            checks++;
            if (int'(rd[l][i][b]) != ref_mem[l][i][b]) begin
              failures++;
              if (failures < 5) $display("l=%0d i=%0d got %0d exp %0d", l, i, rd[l][i][b], ref_mem[l][i][b]);
            end
          end
      end
  endtask

  initial begin
    ch_we = 0; we = 0; copy_en = 0; stage = 0;
    wr = '{default: '0}; ch_in = '{default: '0}; parent = '{default: '0};
    ref_mem = '{default: 0}; ref_ch = '{default: 0};
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < N; i++) for (int b = 0; b < 2; b++) begin
      ref_ch[i][b] = $signed($urandom_range(0, 6)) - 3;
      ch_in[i][b] = QCH'(ref_ch[i][b]);
    end
    ch_we = 1;
    @(negedge clk);
    ch_we = 0;
    compare();
    for (int n = 0; n < 300; n++) begin
      if ($urandom % 3 == 0) begin
        for (int l = 0; l < L; l++) parent[l] = 2'($urandom);
        copy_en = 1;
        begin
          automatic int tmp [L][N][2] = ref_mem;
          for (int l = 0; l < L; l++) ref_mem[l] = tmp[parent[l]];
        end
        copies++;
      end else begin
        int s;
        s = $urandom_range(1, D);
        stage = 8'(s);
        we = 1;
        for (int l = 0; l < L; l++) for (int i = 0; i < N; i++) for (int b = 0; b < 2; b++) begin
          int lim, v;
          lim = 3 * (1 << s);              // |stage-s value| <= 3 * 2^s
          v = $signed($urandom_range(0, 2 * lim)) - lim;
          wr[l][i][b] = QM'(v);
          if (i >= (N >> s) && i < (N >> (s - 1))) ref_mem[l][i][b] = v;
        end
      end
      @(negedge clk);
      we = 0; copy_en = 0;
      compare();
    end
    if (copies == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
