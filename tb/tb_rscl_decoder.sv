// tb_rscl_decoder: end-to-end test of the decoder at reduced size, in both
// configurations the design supports: 4-bit decision (K = 2, L = 2) and
// 2-bit decision (K = 1, L = 4), N = 64, 9-bit channel values (wider than
// the default 3 bits to make metric ties at the list boundary rarer, so the
// reference comparison applies to more frames).
module tb_rscl_decoder;
  localparam int N = 64, QCH = 9, M = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks_a, failures_a, checks_b, failures_b;
  logic fin_a, fin_b;

  // ---- 4b-rSCL, L = 2
  localparam int KA = 2, LA = 2;
  logic start_a, busy_a, done_a;
  logic signed [QCH-1:0] ch_a [N][2];
  logic [N-1:0] info_a, u_a;
  logic signed [QCH+M-1:0] bm_a;
  logic [N-1:0] paths_a [LA];
  logic [LA-1:0] lv_a;

  rscl_decoder #(.N(N), .K(KA), .L(LA), .QCH(QCH)) dut_a (
    .clk, .rst_n, .start(start_a), .ch_ll(ch_a), .info_mask(info_a), .busy(busy_a), .done(done_a),
    .u_hat(u_a), .best_metric(bm_a), .list_paths(paths_a), .list_valid(lv_a));

  tb_rscl_driver #(.N(N), .K(KA), .L(LA), .QCH(QCH), .FRAMES(40), .SCALE(12.0)) drv_a (
    .clk, .rst_n, .start(start_a), .ch_ll(ch_a), .info_mask(info_a), .busy(busy_a), .done(done_a),
    .u_hat(u_a), .best_metric(bm_a), .list_valid(lv_a),
    .pe_we(dut_a.pe_we), .pe_ctrl(dut_a.pe_ctrl), .sel_en(dut_a.sel_en), .parent(dut_a.parent),
    .grp(dut_a.grp), .info_q(dut_a.info_q), .checks(checks_a), .failures(failures_a), .finished(fin_a));

  // ---- 2b-rSCL, L = 4
  localparam int KB = 1, LB = 4;
  logic start_b, busy_b, done_b;
  logic signed [QCH-1:0] ch_b [N][2];
  logic [N-1:0] info_b, u_b;
  logic signed [QCH+M-1:0] bm_b;
  logic [N-1:0] paths_b [LB];
  logic [LB-1:0] lv_b;

  rscl_decoder #(.N(N), .K(KB), .L(LB), .QCH(QCH)) dut_b (
    .clk, .rst_n, .start(start_b), .ch_ll(ch_b), .info_mask(info_b), .busy(busy_b), .done(done_b),
    .u_hat(u_b), .best_metric(bm_b), .list_paths(paths_b), .list_valid(lv_b));

  tb_rscl_driver #(.N(N), .K(KB), .L(LB), .QCH(QCH), .FRAMES(40), .SCALE(12.0)) drv_b (
    .clk, .rst_n, .start(start_b), .ch_ll(ch_b), .info_mask(info_b), .busy(busy_b), .done(done_b),
    .u_hat(u_b), .best_metric(bm_b), .list_valid(lv_b),
    .pe_we(dut_b.pe_we), .pe_ctrl(dut_b.pe_ctrl), .sel_en(dut_b.sel_en), .parent(dut_b.parent),
    .grp(dut_b.grp), .info_q(dut_b.info_q), .checks(checks_b), .failures(failures_b), .finished(fin_b));

  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks_a + checks_b, failures_a + failures_b + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (fin_a && fin_b);
    $display("TB_RESULT checks=%0d failures=%0d", checks_a + checks_b, failures_a + failures_b);
    $finish;
  end
endmodule
