// survival_path_bank: the L survival paths of the list decoder.
//
// Each slot holds the bits decided so far (u_1 .. u_n, bit 0 = u_1), the
// path metric chosen by the sorter and a valid flag. init (start of a
// codeword) makes slot 0 the only valid path, with metric 0. upd_en applies
// one pruning step for group grp: slot l copies the bits of slot parent[l],
// writes its 2^K new bits at positions grp*2^K .. grp*2^K+2^K-1, takes
// metric[l], and is valid unless that metric is -Inf (fewer than L
// qualified candidates existed).
//
// best / best_metric give the valid slot with the largest metric (lowest
// slot on a tie), i.e. the decoder output once the last group is done.
// Storing and updating survival paths is the paper's; the valid flag and
// the tie rule are this design's choices.
module survival_path_bank #(
  parameter int unsigned N  = 1024,
  parameter int unsigned K  = 2,
  parameter int unsigned L  = 2,
  parameter int unsigned QM = 13,
  localparam int unsigned M  = $clog2(N),
  localparam int unsigned D  = M - K,
  localparam int unsigned LW = (L > 1) ? $clog2(L) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 init,
  input  logic                 upd_en,
  input  logic [D-1:0]         grp,
  input  logic [LW-1:0]        parent [L],
  input  logic [2**K-1:0]      bits   [L],
  input  logic signed [QM-1:0] metric [L],
  output logic [L-1:0]         path_valid,
  output logic [N-1:0]         paths  [L],
  output logic signed [QM-1:0] metrics [L],
  output logic [LW-1:0]        best,
  output logic signed [QM-1:0] best_metric
);
  localparam logic signed [QM-1:0] NEG_INF = {1'b1, {(QM-1){1'b0}}};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      paths      <= '{default: '0};
      metrics    <= '{default: '0};
      path_valid <= '0;
    end else if (init) begin
      paths      <= '{default: '0};
      metrics    <= '{default: '0};
      path_valid <= L'(1);
    end else if (upd_en) begin
      for (int unsigned l = 0; l < L; l++) begin
        logic [N-1:0] p;
        p = paths[parent[l]];
        for (int unsigned b = 0; b < 2**K; b++)
          p[{grp, K'(b)}] = bits[l][b];
        paths[l]      <= p;
        metrics[l]    <= metric[l];
        path_valid[l] <= (metric[l] != NEG_INF);
      end
    end
  end

  always_comb begin
    best        = '0;
    best_metric = NEG_INF;
    for (int unsigned l = 0; l < L; l++)
      if (path_valid[l] && (metrics[l] > best_metric || best_metric == NEG_INF)) begin
        best        = LW'(l);
        best_metric = metrics[l];
      end
  end
endmodule
