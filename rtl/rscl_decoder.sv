// rscl_decoder: L-size 2^K-bit reformulated successive-cancellation list
// (2^K b-rSCL) decoder for an (N, k) polar code, max-log log-likelihood
// arithmetic. Default: N = 1024, K = 2 (4-bit decision), L = 2, 3-bit
// channel values.
//
// Data path, per list slot l:
//   LL bank -> SC component decoder (f/g stages 1..m-K, one stage a cycle)
//           -> MCU (2^(2^K) candidate metrics of the next 2^K bits)
//           -> ZFU (candidates that set a frozen bit get -Inf)
// The 2^(2^K)*L candidates, tagged with their slot and bit pattern, go to
// the two-stage path pruner, which keeps the L largest. The pruning step
// then copies each survivor's parent history in the LL bank, the
// partial-sum generator and the survival path bank.
//
// Interface: with start high in idle the decoder latches ch_ll (LL(0) and
// LL(1) of each code bit, signed QCH bits, expected within
// +-(2^(QCH-1)-1)) and info_mask (1 = information bit). busy is then high
// for N/2^(K-2) - 2 cycles (N-2 for K = 2, 2N-2 for K = 1); done pulses in
// the next cycle, with u_hat (bit i = u_{i+1}) the valid list path of the
// largest metric, best_metric its metric, and list_paths / list_valid all L
// survivors. Outputs stay valid until the next start.
//
// Block structure, equations and latency follow the paper; the storage
// layout, the path copying, the interface and the handling of empty list
// slots are this design's choices (see the README).
module rscl_decoder #(
  parameter int unsigned N   = rscl_pkg::N_DEFAULT,
  parameter int unsigned K   = rscl_pkg::K_DEFAULT,
  parameter int unsigned L   = rscl_pkg::L_DEFAULT,
  parameter int unsigned QCH = rscl_pkg::QCH_DEFAULT,
  localparam int unsigned M  = $clog2(N),
  localparam int unsigned QM = QCH + M,
  localparam int unsigned LW = (L > 1) ? $clog2(L) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic signed [QCH-1:0] ch_ll [N][2],
  input  logic [N-1:0]          info_mask,
  output logic                  busy,
  output logic                  done,
  output logic [N-1:0]          u_hat,
  output logic signed [QM-1:0]  best_metric,
  output logic [N-1:0]          list_paths [L],
  output logic [L-1:0]          list_valid
);
  localparam int unsigned D    = M - K;
  localparam int unsigned NB   = 2**K;          // bits per group
  localparam int unsigned NCPL = 2**NB;         // candidates per list slot
  localparam int unsigned NC   = NCPL * L;      // candidates in total
  localparam int unsigned W    = QM + LW + NB;  // sorter element: metric | slot | pattern

  // control
  logic               first, pe_we, sel_en;
  logic [7:0]         stage;
  rscl_pkg::pe_mode_e pe_ctrl;
  logic [D-1:0]       grp;
  rscl_pkg::state_e   state;

  rscl_controller #(.M(M), .K(K)) u_ctrl (
    .clk, .rst_n, .start, .first, .busy, .done, .pe_we, .stage, .pe_ctrl,
    .sel_en, .grp, .state
  );

  // frozen pattern register
  logic [N-1:0] info_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     info_q <= '0;
    else if (first) info_q <= info_mask;
  end

  // LL storage and SC component decoders
  logic signed [QM-1:0] ch_rd [N][2];
  logic signed [QM-1:0] ll_rd [L][N][2];
  logic signed [QM-1:0] ll_wr [L][N][2];
  logic [N-1:0]         ps    [L];
  logic [LW-1:0]        parent [L];
  logic [NB-1:0]        bits   [L];
  logic signed [QM-1:0] metric [L];
  logic [L-1:0]         path_valid;

  ll_memory_bank #(.N(N), .K(K), .L(L), .QCH(QCH)) u_llbank (
    .clk, .rst_n, .ch_we(first), .ch_in(ch_ll), .we(pe_we), .stage,
    .wr(ll_wr), .copy_en(sel_en), .parent, .ch_rd, .rd(ll_rd)
  );

  logic [W-1:0] cand [NC];

  for (genvar l = 0; l < L; l++) begin : g_path
    logic signed [QM-1:0] leaf [NB][2];
    logic signed [QM-1:0] p    [NCPL];
    logic signed [QM-1:0] m    [NCPL];

    sc_component_decoder #(.N(N), .K(K), .QM(QM)) u_scd (
      .ch(ch_rd), .mem(ll_rd[l]), .ps(ps[l]), .ctrl(pe_ctrl), .wr(ll_wr[l])
    );

    // stage m-K outputs: heap indices 2^K .. 2^(K+1)-1
    always_comb begin
      for (int unsigned j = 0; j < NB; j++) begin
        leaf[j][0] = ll_rd[l][NB + j][0];
        leaf[j][1] = ll_rd[l][NB + j][1];
      end
    end

    rscl_mcu #(.K(K), .QM(QM)) u_mcu (.ll(leaf), .p(p));
    rscl_zfu #(.K(K), .QM(QM)) u_zfu (
      .p(p), .info(info_q[grp*NB +: NB]), .path_valid(path_valid[l]), .m(m)
    );

    for (genvar c = 0; c < NCPL; c++) begin : g_cand
      assign cand[l*NCPL + c] = {m[c], LW'(l), NB'(c)};
    end
  end

  // list pruning
  logic [W-1:0] sel [L];

  path_pruner #(.NC(NC), .L(L), .W(W), .KW(QM)) u_prune (
    .clk, .rst_n, .din(cand), .dout(sel)
  );

  always_comb begin
    for (int unsigned l = 0; l < L; l++) begin
      logic [31:0] r;
      metric[l] = sel[l][W-1 -: QM];
      parent[l] = sel[l][NB +: LW];
      r         = rscl_pkg::rev_bits(32'(sel[l][NB-1:0]), NB);
      bits[l]   = r[NB-1:0];
    end
  end

  partial_sum_generator #(.N(N), .K(K), .L(L)) u_psg (
    .clk, .rst_n, .clear(first), .upd_en(sel_en), .grp, .parent, .bits, .ps
  );

  logic signed [QM-1:0] metrics [L];
  logic [LW-1:0]        best;

  survival_path_bank #(.N(N), .K(K), .L(L), .QM(QM)) u_spb (
    .clk, .rst_n, .init(first), .upd_en(sel_en), .grp, .parent, .bits,
    .metric, .path_valid, .paths(list_paths), .metrics, .best, .best_metric
  );

  assign u_hat      = list_paths[best];
  assign list_valid = path_valid;
endmodule
