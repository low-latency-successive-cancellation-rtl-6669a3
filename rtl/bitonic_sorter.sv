// bitonic_sorter: NI x NI bitonic sorting network (NI a power of two),
// combinational, built from 2x2 compare-exchange units: increasing-order
// sorters (IOS) and decreasing-order sorters (DOS).
//
// An element is a W-bit word whose upper KW bits are a signed key; the lower
// bits are a tag that travels with the key. With DESCEND = 0 the output is
// in increasing key order (dout[0] smallest), with DESCEND = 1 decreasing.
// The network is the classic one: log2(NI) merge phases, phase k made of
// log2(k) compare-exchange columns; the first phases alternate IOS/DOS to
// build bitonic runs and only the last merge takes the requested direction,
// which is how the paper's 8-input example draws both 4x4 sorters. Equal
// keys leave no defined order among their tags.
module bitonic_sorter #(
  parameter int unsigned NI      = 4,
  parameter int unsigned W       = 14,
  parameter int unsigned KW      = 13,
  parameter bit          DESCEND = 1'b0
) (
  input  logic [W-1:0] din  [NI],
  output logic [W-1:0] dout [NI]
);
  function automatic logic signed [KW-1:0] key(input logic [W-1:0] e);
    return e[W-1 -: KW];
  endfunction

  always_comb begin
    logic [W-1:0] v [NI];
    logic [W-1:0] t;
    logic         up;
    v  = din;
    t  = '0;
    up = 1'b0;
    for (int unsigned k = 2; k <= NI; k = k * 2) begin
      for (int unsigned j = k / 2; j > 0; j = j / 2) begin
        for (int unsigned i = 0; i < NI; i++) begin
          if ((i ^ j) > i) begin
            up = ((i & k) == 0) ^ (DESCEND && (k == NI));
            if (up ? (key(v[i]) > key(v[i ^ j])) : (key(v[i]) < key(v[i ^ j]))) begin
              t         = v[i];
              v[i]      = v[i ^ j];
              v[i ^ j]  = t;
            end
          end
        end
      end
    end
    dout = v;
  end
endmodule
