// ll_memory_bank: log-likelihood storage of the decoder. It holds the channel
// values (shared by all list paths) and, for each of the L list slots, the
// values of f/g stages 1 .. m-K.
//
// Widths grow by stage as in the paper's quantisation: the channel is kept
// at QCH bits and stage s at QCH+s bits. Reads are sign-extended to the
// common width QM = QCH + m and presented in the heap layout used by the SC
// component decoders (stage s at indices [2^(m-s), 2^(m-s+1))).
//
// Operations, one per clock:
//   ch_we    latch new channel values (start of a codeword);
//   we       store the PE results of the active stage for every slot;
//   copy_en  list pruning: slot l takes the whole LL history of slot
//            parent[l] (several new slots may share a parent).
// The memory is written as register arrays; the paper does not describe how
// paths are copied, so the full copy on pruning is this design's choice.
module ll_memory_bank #(
  parameter int unsigned N   = 1024,
  parameter int unsigned K   = 2,
  parameter int unsigned L   = 2,
  parameter int unsigned QCH = 3,
  localparam int unsigned M  = $clog2(N),
  localparam int unsigned QM = QCH + M,
  localparam int unsigned LW = (L > 1) ? $clog2(L) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 ch_we,
  input  logic signed [QCH-1:0] ch_in [N][2],
  input  logic                 we,
  input  logic [7:0]           stage,
  input  logic signed [QM-1:0] wr [L][N][2],
  input  logic                 copy_en,
  input  logic [LW-1:0]        parent [L],
  output logic signed [QM-1:0] ch_rd [N][2],
  output logic signed [QM-1:0] rd [L][N][2]
);
  localparam int unsigned D = M - K;

  // channel store, packed: entry i, value b at ch_mem[i][b]
  logic [N-1:0][1:0][QCH-1:0] ch_mem;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ch_mem <= '0;
    else if (ch_we) begin
      for (int unsigned i = 0; i < N; i++)
        for (int unsigned b = 0; b < 2; b++)
          ch_mem[i][b] <= ch_in[i][b];
    end
  end

  always_comb begin
    for (int unsigned i = 0; i < N; i++)
      for (int unsigned b = 0; b < 2; b++)
        ch_rd[i][b] = QM'($signed(ch_mem[i][b]));
  end

  for (genvar s = 1; s <= D; s++) begin : g_stage
    localparam int unsigned HALF = 2**(M - s);
    localparam int unsigned WS   = QCH + s;
    logic signed [WS-1:0] mem    [L][HALF][2];
    logic signed [WS-1:0] mem_nx [L][HALF][2];

    always_comb begin
      mem_nx = mem;
      if (we && (stage == 8'(s))) begin
        for (int unsigned l = 0; l < L; l++)
          for (int unsigned j = 0; j < HALF; j++)
            for (int unsigned b = 0; b < 2; b++)
              mem_nx[l][j][b] = wr[l][HALF + j][b][WS-1:0];
      end else if (copy_en) begin
        for (int unsigned l = 0; l < L; l++)
          mem_nx[l] = mem[parent[l]];
      end
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) mem <= '{default: '0};
      else        mem <= mem_nx;
    end

    always_comb begin
      for (int unsigned l = 0; l < L; l++)
        for (int unsigned j = 0; j < HALF; j++)
          for (int unsigned b = 0; b < 2; b++)
            rd[l][HALF + j][b] = QM'(mem[l][j][b]);
    end
  end

  always_comb begin
    for (int unsigned l = 0; l < L; l++)
      for (int unsigned i = 0; i < 2**K; i++)
        for (int unsigned b = 0; b < 2; b++)
          rd[l][i][b] = '0;
  end
endmodule
