// rscl_zfu: zero-forcing unit. In the log domain "forcing a likelihood to 0"
// means forcing the metric to -Inf, coded here as the most negative QM-bit
// number.
//
// Candidate c (alpha_1 in the MSB, as from rscl_mcu) keeps its metric only if
// every bit it sets to 1 is an information bit; a candidate that puts a 1 on
// a frozen position gets -Inf and can never be chosen by the sorter.
// info[p] = 1 marks bit p of the group (p = 0 is the first bit) as an
// information bit; these are the ctrl1..ctrl2^K selects of the paper's mux
// row. path_valid = 0 forces every candidate of an empty list slot to -Inf;
// that input is this design's addition for the start of decoding, when fewer
// than L paths exist. Combinational.
module rscl_zfu #(
  parameter int unsigned K  = 2,
  parameter int unsigned QM = 13
) (
  input  logic signed [QM-1:0] p    [2**(2**K)],
  input  logic [2**K-1:0]      info,
  input  logic                 path_valid,
  output logic signed [QM-1:0] m    [2**(2**K)]
);
  localparam int unsigned NB = 2**K;
  localparam logic signed [QM-1:0] NEG_INF = {1'b1, {(QM-1){1'b0}}};

  always_comb begin
    for (int unsigned c = 0; c < 2**NB; c++) begin
      logic [31:0] alpha;
      alpha = rscl_pkg::rev_bits(32'(c), NB);
      if (!path_valid || ((alpha[NB-1:0] & ~info) != '0))
        m[c] = NEG_INF;
      else
        m[c] = p[c];
    end
  end
endmodule
