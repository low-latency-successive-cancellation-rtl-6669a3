// path_pruner: picks the L largest of NC candidate path metrics
// (NC = 2^(2^K) * L) and is pipelined over two clock cycles.
//
// It is a cascade of log2(NC/L) metric sorting blocks, each keeping the
// larger half of its inputs: NC -> NC/2 -> ... -> L. A register bank sits
// after the first ceil(stages/2) blocks, so the unit has one cycle of
// latency: candidates presented in cycle t appear on dout in cycle t+1.
// This is the re-pipelined arrangement in which the register that used to
// sit in front of the sorter is moved into it, so that MCU/ZFU and the first
// half of the sorting share one cycle and the rest of the sorting the next.
//
// The halving sorting block and the two-stage pipelining are the paper's.
// The paper states that one NC-input NC/2-output block suffices to find the
// L largest; since one block only halves the set, this design cascades the
// blocks, which is its own choice. dout is unordered among the L survivors.
module path_pruner #(
  parameter int unsigned NC = 32,
  parameter int unsigned L  = 2,
  parameter int unsigned W  = 14,
  parameter int unsigned KW = 13
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] din  [NC],
  output logic [W-1:0] dout [L]
);
  localparam int unsigned NS   = $clog2(NC / L);   // number of halving blocks
  localparam int unsigned PIPE = (NS + 1) / 2;     // register after this block

  logic [W-1:0] q [NC >> PIPE];   // pipeline register inside the sorting

  for (genvar b = 0; b < NS; b++) begin : g_blk
    localparam int unsigned NIN = NC >> b;
    logic [W-1:0] bin  [NIN];
    logic [W-1:0] bout [NIN/2];
    if (b == 0) begin : g_in
      if (PIPE == 0) begin : g_q
        assign bin = q;
      end else begin : g_d
        assign bin = din;
      end
    end else if (b == PIPE) begin : g_in
      assign bin = q;
    end else begin : g_in
      assign bin = g_blk[b-1].bout;
    end
    metric_sort_block #(.NI(NIN), .W(W), .KW(KW)) u_msb (.din(bin), .dout(bout));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) q <= '{default: '0};
    else        q <= g_blk[PIPE-1].bout;
  end

  if (PIPE == NS) begin : g_out_q
    assign dout = q;
  end else begin : g_out_c
    assign dout = g_blk[NS-1].bout;
  end
endmodule
