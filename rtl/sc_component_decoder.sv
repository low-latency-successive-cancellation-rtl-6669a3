// sc_component_decoder: the f/g part of one SC component decoder (one list
// path), i.e. stages 1 .. m-K of the successive-cancellation tree; the last
// K stages are replaced by the metric computation and zero-forcing units.
//
// Stage s (1 <= s <= m-K) has 2^(m-s) processing elements. PE j of stage s
// combines a = LL_{s-1}[j] and b = LL_{s-1}[j + 2^(m-s)] (LL_0 is the
// channel), and for g uses the partial sum u_sum = ps[2^(m-s) + j], i.e. the
// re-encoded estimate of the left sibling at stage s. All stages evaluate
// every cycle; the LL memory bank stores only the stage the controller has
// activated, so one f or g step of a stage takes one clock cycle.
//
// Storage uses a heap layout shared with the LL bank and the partial-sum
// generator: stage s occupies indices [2^(m-s), 2^(m-s+1)); indices below
// 2^K are unused. Combinational. The f/g pairing follows the paper's
// natural-order encoder; one PE per output of each stage is this design's
// choice (the paper does not give the PE count).
module sc_component_decoder #(
  parameter int unsigned N  = 1024,
  parameter int unsigned K  = 2,
  parameter int unsigned QM = 13
) (
  input  logic signed [QM-1:0] ch  [N][2],
  input  logic signed [QM-1:0] mem [N][2],
  input  logic [N-1:0]         ps,
  input  rscl_pkg::pe_mode_e   ctrl,
  output logic signed [QM-1:0] wr  [N][2]
);
  localparam int unsigned M = $clog2(N);
  localparam int unsigned D = M - K;          // number of f/g stages

  for (genvar s = 1; s <= D; s++) begin : g_stage
    localparam int unsigned HALF = 2**(M - s);  // outputs of stage s
    for (genvar j = 0; j < HALF; j++) begin : g_pe
      logic signed [QM-1:0] a0, a1, b0, b1;
      if (s == 1) begin : g_src
        assign a0 = ch[j][0];
        assign a1 = ch[j][1];
        assign b0 = ch[j + HALF][0];
        assign b1 = ch[j + HALF][1];
      end else begin : g_src
        assign a0 = mem[2*HALF + j][0];
        assign a1 = mem[2*HALF + j][1];
        assign b0 = mem[3*HALF + j][0];
        assign b1 = mem[3*HALF + j][1];
      end
      rscl_pe #(.QM(QM)) u_pe (
        .a0(a0), .a1(a1), .b0(b0), .b1(b1),
        .usum(ps[HALF + j]), .ctrl(ctrl),
        .o0(wr[HALF + j][0]), .o1(wr[HALF + j][1])
      );
    end
  end

  for (genvar i = 0; i < 2**K; i++) begin : g_unused
    assign wr[i][0] = '0;
    assign wr[i][1] = '0;
  end
endmodule
