// tb_rscl_decoder_full: the decoder at its default size, (1024, 512) polar
// code, 4-bit decision, list size 2, 3-bit channel values. Two codewords:
// a noiseless one, which must decode to the transmitted message, and one
// at sigma = 0.8. Checks the latency of n - 2 = 1022 cycles, zero frozen
// bits and the consistency of the reported metric with the reference model
// (with 3-bit values, metric ties at the list boundary are frequent, so the
// comparison with the reference decoder applies only to frames without one).
module tb_rscl_decoder_full;
  localparam int N = 1024, K = 2, L = 2, QCH = 3, M = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks, failures;
  logic fin;
  logic start, busy, done;
  logic signed [QCH-1:0] ch [N][2];
  logic [N-1:0] info, u;
  logic signed [QCH+M-1:0] bm;
  logic [N-1:0] paths [L];
  logic [L-1:0] lv;

  rscl_decoder dut (
    .clk, .rst_n, .start, .ch_ll(ch), .info_mask(info), .busy, .done,
    .u_hat(u), .best_metric(bm), .list_paths(paths), .list_valid(lv));

  tb_rscl_driver #(.N(N), .K(K), .L(L), .QCH(QCH), .FRAMES(2), .SCALE(0.5)) drv (
    .clk, .rst_n, .start, .ch_ll(ch), .info_mask(info), .busy, .done,
    .u_hat(u), .best_metric(bm), .list_valid(lv),
    .pe_we(dut.pe_we), .pe_ctrl(dut.pe_ctrl), .sel_en(dut.sel_en), .parent(dut.parent),
    .grp(dut.grp), .info_q(dut.info_q), .checks(checks), .failures(failures), .finished(fin));

  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (fin);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
