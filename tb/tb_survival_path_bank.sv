// tb_survival_path_bank: N = 16, K = 1, L = 4. Random pruning steps with
// random parents, bits and metrics (some -Inf) are mirrored in a reference
// model; paths, validity, metrics and the best-path choice are compared.
module tb_survival_path_bank;
  localparam int N = 16, K = 1, L = 4, QM = 8, M = 4, D = M - K, NB = 2;
  localparam logic signed [QM-1:0] NEG_INF = {1'b1, {(QM-1){1'b0}}};
  logic clk = 0, rst_n = 0, init, upd_en;
  logic [D-1:0] grp;
  logic [1:0] parent [L], best;
  logic [NB-1:0] bits [L];
  logic signed [QM-1:0] metric [L], metrics [L], best_metric;
  logic [L-1:0] path_valid;
  logic [N-1:0] paths [L];
  logic [N-1:0] rp [L];
  int rm [L];
  bit rv [L];
  int checks = 0, failures = 0, invalid_seen = 0;

  survival_path_bank #(.N(N), .K(K), .L(L), .QM(QM)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    int bm, bi;
    bi = -1; bm = 0;
    for (int l = 0; l < L; l++) begin
      checks += 2;
      if (paths[l] != rp[l]) failures++;
      if (path_valid[l] != rv[l]) failures++;
      if (rv[l]) begin
        checks++;
        if (int'(metrics[l]) != rm[l]) failures++;
        if (bi < 0 || rm[l] > bm) begin bi = l; bm = rm[l]; end
      end else invalid_seen++;
    end
    if (bi >= 0) begin
      checks += 2;
      if (int'(best) != bi) failures++;
      if (int'(best_metric) != bm) failures++;
    end
  endtask

  initial begin
    init = 0; upd_en = 0; grp = '0; parent = '{default: '0}; bits = '{default: '0}; metric = '{default: '0};
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int frame = 0; frame < 40; frame++) begin
      @(negedge clk);
      init = 1;
      @(negedge clk);
      init = 0;
      rp = '{default: '0}; rm = '{default: 0}; rv = '{default: 0}; rv[0] = 1;
      compare();
      for (int g = 0; g < N / NB; g++) begin
        logic [N-1:0] np [L];
        for (int l = 0; l < L; l++) begin
          parent[l] = 2'($urandom);
          bits[l]   = NB'($urandom);
          metric[l] = ($urandom % 5 == 0) ? NEG_INF : QM'($signed($urandom_range(0, 100)) - 100);
          np[l] = rp[parent[l]];
          for (int p = 0; p < NB; p++) np[l][g*NB + p] = bits[l][p];
        end
        grp = D'(g);
        upd_en = 1;
        @(negedge clk);
        upd_en = 0;
        for (int l = 0; l < L; l++) begin
          rp[l] = np[l];
          rm[l] = int'(metric[l]);
          rv[l] = (metric[l] != NEG_INF);
        end
        compare();
      end
    end
    if (invalid_seen == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
