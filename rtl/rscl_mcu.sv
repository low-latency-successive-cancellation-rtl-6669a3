// rscl_mcu: metric computation unit of the 2^K-bit reformulated last stages.
//
// Inputs are the 2^K log-likelihood pairs LL_j(0), LL_j(1) that stage m-K
// hands over (a_1..a_{2^(K-1)} then b_1..b_{2^(K-1)}). For every one of the
// 2^(2^K) values alpha of the next 2^K decoded bits the unit outputs the
// path metric
//       P(alpha) = sum_j LL_j(x_j),   x = alpha * G_(2^K)  (polar transform),
// e.g. for K = 2: a1(a1^a2^a3^a4) + a2(a2^a4) + b1(a3^a4) + b2(a4).
// As in the paper's adder diagram, the a-half and b-half sums are formed once
// per combination of their x bits and then one adder per candidate adds them.
//
// Output index c holds alpha_1 in its most significant bit, so p[1] is
// P(00..01). Combinational. The equations follow the paper; the generic-K
// form of the shared adder tree is this design's generalisation of the
// K = 1 and K = 2 diagrams.
module rscl_mcu #(
  parameter int unsigned K  = 2,
  parameter int unsigned QM = 13
) (
  input  logic signed [QM-1:0] ll [2**K][2],
  output logic signed [QM-1:0] p  [2**(2**K)]
);
  localparam int unsigned NB = 2**K;        // bits per group
  localparam int unsigned H  = NB / 2;      // pairs per half
  localparam int unsigned NC = 2**NB;       // candidates

  logic signed [QM-1:0] sa [2**H];          // a-half sums by x_1..x_H
  logic signed [QM-1:0] sb [2**H];          // b-half sums by x_{H+1}..x_NB

  always_comb begin
    for (int unsigned x = 0; x < 2**H; x++) begin
      sa[x] = '0;
      sb[x] = '0;
      for (int unsigned j = 0; j < H; j++) begin
        sa[x] = sa[x] + ll[j][(x >> j) & 1];
        sb[x] = sb[x] + ll[H + j][(x >> j) & 1];
      end
    end
    for (int unsigned c = 0; c < NC; c++) begin
      logic [31:0] alpha, x;
      alpha = rscl_pkg::rev_bits(32'(c), NB);   // bit p = alpha_{p+1}
      x     = rscl_pkg::polar_enc(alpha, K);
      p[c]  = sa[x[H-1:0]] + sb[x[NB-1:H]];
    end
  end
endmodule
