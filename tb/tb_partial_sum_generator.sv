// tb_partial_sum_generator: N = 32, K = 1, L = 2 (four stages of partial
// sums). Random group decisions with random parents; after every update the
// stage-s region of each slot must hold the polar re-encoding of the u bits
// of the latest completed left node at that stage, computed here directly
// from the reference paths.
module tb_partial_sum_generator;
  localparam int N = 32, K = 1, L = 2, M = 5, D = M - K, NB = 2;
  logic clk = 0, rst_n = 0, clear, upd_en;
  logic [D-1:0] grp;
  logic [0:0] parent [L];
  logic [NB-1:0] bits [L];
  logic [N-1:0] ps [L];
  bit u [L][N];
  int checks = 0, failures = 0;

  partial_sum_generator #(.N(N), .K(K), .L(L)) dut (.*);

  always #5 clk = ~clk;

  // x = u F^{(x)log2(len)} over u[lo +: len], natural order
  function automatic void enc(input bit src [N], input int lo, input int len, output bit x [N]);
    for (int i = 0; i < len; i++) x[i] = src[lo + i];
    for (int h = 1; h < len; h = h * 2)
      for (int i = 0; i < len; i++)
        if ((i & h) == 0) x[i] = x[i] ^ x[i + h];
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; upd_en = 0; grp = '0; parent = '{default: '0}; bits = '{default: '0};
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int frame = 0; frame < 30; frame++) begin
      @(negedge clk);
      clear = 1;
      u = '{default: 0};
      @(negedge clk);
      clear = 0;
      for (int g = 0; g < N / NB; g++) begin
        bit nu [L][N];
        for (int l = 0; l < L; l++) begin
          parent[l] = 1'($urandom);
          bits[l]   = NB'($urandom);
          nu[l] = u[parent[l]];
          for (int p = 0; p < NB; p++) nu[l][g*NB + p] = bits[l][p];
        end
        grp = D'(g);
        upd_en = 1;
        @(negedge clk);
        upd_en = 0;
        u = nu;
        // completed bits: (g+1)*NB
        for (int l = 0; l < L; l++)
          for (int s = 1; s <= D; s++) begin
            int sz, c, left;
            bit x [N];
            sz = N >> s;
            c = ((g + 1) * NB) / sz;          // completed nodes at stage s
            if (c == 0) continue;
            left = (c - 1) & ~1;               // latest completed left node
            enc(u[l], left * sz, sz, x);
            for (int j = 0; j < sz; j++) begin
              checks++;
              if (ps[l][sz + j] != x[j]) begin
                failures++;
                if (failures < 5) $display("g=%0d l=%0d s=%0d j=%0d", g, l, s, j);
              end
            end
          end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
