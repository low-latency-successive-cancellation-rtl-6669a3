// metric_sort_block: NI-input, NI/2-output metric sorting block. It returns
// the NI/2 elements with the largest keys (in bitonic, not sorted, order).
//
// The lower half of the inputs goes through an increasing-order bitonic
// sorter (i_1 <= ... <= i_{NI/2}), the upper half through a decreasing-order
// one (d_1 >= ... >= d_{NI/2}); a row of compare-and-select units then gives
// out_j = max(i_j, d_j). This is the paper's structure; for NI = 8 it is the
// paper's 8-input 4-output example. Combinational: its depth is
// 1 + (s-1)s/2 C&S delays for NI = 2^s.
module metric_sort_block #(
  parameter int unsigned NI = 8,
  parameter int unsigned W  = 14,
  parameter int unsigned KW = 13
) (
  input  logic [W-1:0] din  [NI],
  output logic [W-1:0] dout [NI/2]
);
  localparam int unsigned H = NI / 2;

  logic [W-1:0] lo_in [H], hi_in [H], inc [H], dec [H];

  always_comb begin
    for (int unsigned j = 0; j < H; j++) begin
      lo_in[j] = din[j];
      hi_in[j] = din[H + j];
    end
  end

  bitonic_sorter #(.NI(H), .W(W), .KW(KW), .DESCEND(1'b0)) u_inc (.din(lo_in), .dout(inc));
  bitonic_sorter #(.NI(H), .W(W), .KW(KW), .DESCEND(1'b1)) u_dec (.din(hi_in), .dout(dec));

  always_comb begin
    for (int unsigned j = 0; j < H; j++)
      dout[j] = ($signed(inc[j][W-1 -: KW]) >= $signed(dec[j][W-1 -: KW])) ? inc[j] : dec[j];
  end
endmodule
