// partial_sum_generator: keeps, for each list slot, the partial sums u_sum
// that the g operations need, and updates them after every group decision.
//
// After group i (2^K bits) is decided for a new path, its bits are
// re-encoded with the 2^K-point polar transform, giving the estimate of the
// stage-(m-K) node. Going up the tree, a node that is a left child stores
// its estimate in the slot's stage-s region (it is what the g operations of
// its right sibling read); a node that is a right child is merged with its
// stored left sibling v into the parent's estimate [v xor w, w] and the walk
// continues one stage up. Bit (m-K-s) of the group index says whether the
// stage-s node is a right child. This is the encoder butterfly of the paper,
// applied level by level.
//
// Heap layout as the LL bank: stage s at bits [2^(m-s), 2^(m-s+1)).
// clear zeroes all slots; upd_en (at list pruning) writes slot l from slot
// parent[l] plus bits[l] (bit p = p-th bit of the group). The paper gives
// only the function ("similar to the polar encoder"); the storage layout is
// this design's choice.
module partial_sum_generator #(
  parameter int unsigned N  = 1024,
  parameter int unsigned K  = 2,
  parameter int unsigned L  = 2,
  localparam int unsigned M  = $clog2(N),
  localparam int unsigned D  = M - K,
  localparam int unsigned LW = (L > 1) ? $clog2(L) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clear,
  input  logic            upd_en,
  input  logic [D-1:0]    grp,
  input  logic [LW-1:0]   parent [L],
  input  logic [2**K-1:0] bits   [L],
  output logic [N-1:0]    ps     [L]
);
  logic [N-1:0] nxt [L];

  always_comb begin
    for (int unsigned l = 0; l < L; l++) begin
      logic [N-1:0] src, cur, tmp;
      logic [31:0]  enc;
      logic         fin;
      src = ps[parent[l]];
      nxt[l] = src;
      enc = rscl_pkg::polar_enc(32'(bits[l]), K);
      cur = '0;
      cur[2**K-1:0] = enc[2**K-1:0];
      tmp = '0;
      fin = 1'b0;
      for (int s = D; s >= 1; s--) begin
        if (!fin) begin
          if (!grp[D - s]) begin
            for (int unsigned j = 0; j < N/2; j++)
              if (j < (N >> s)) nxt[l][(N >> s) + j] = cur[j];
            fin = 1'b1;
          end else begin
            tmp = '0;
            for (int unsigned j = 0; j < N/2; j++)
              if (j < (N >> s)) begin
                tmp[j]              = src[(N >> s) + j] ^ cur[j];
                tmp[(N >> s) + j]   = cur[j];
              end
            cur = tmp;
          end
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      ps <= '{default: '0};
    else if (clear)  ps <= '{default: '0};
    else if (upd_en) ps <= nxt;
  end
endmodule
