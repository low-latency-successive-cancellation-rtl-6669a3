// tb_rscl_driver: stimulus and checking for one rscl_decoder instance.
//
// For FRAMES codewords it draws a random message on a Bhattacharyya-chosen
// information set of size N/2, sends it over BPSK/AWGN (frame 0 noiseless,
// then deviations cycling through 0.6, 0.8, 1.0), starts the decoder and
// checks:
//   - busy lasts exactly N/2^(K-2) - 2 cycles and done follows;
//   - u_hat has 0 on every frozen position;
//   - best_metric equals the reference metric of the path u_hat (recomputed
//     from the channel values by the reference model);
//   - if the reference decoder met no tie at the list boundary, best_metric
//     equals the reference decoder's best metric;
//   - a noiseless frame decodes to the transmitted message.
// It also counts the mechanisms of the decoder seen through the probe
// inputs (f and g operations, zero forcing, list forks, dropped paths,
// empty list slots); one that never happened is a failure.
module tb_rscl_driver #(
  parameter int N      = 64,
  parameter int K      = 2,
  parameter int L      = 2,
  parameter int QCH    = 5,
  parameter int FRAMES = 8,
  parameter real SCALE = 0.5,
  localparam int M  = $clog2(N),
  localparam int QM = QCH + M,
  localparam int LW = (L > 1) ? $clog2(L) : 1,
  localparam int D  = M - K
) (
  input  logic                  clk,
  input  logic                  rst_n,
  output logic                  start,
  output logic signed [QCH-1:0] ch_ll [N][2],
  output logic [N-1:0]          info_mask,
  input  logic                  busy,
  input  logic                  done,
  input  logic [N-1:0]          u_hat,
  input  logic signed [QM-1:0]  best_metric,
  input  logic [L-1:0]          list_valid,
  // probes
  input  logic                  pe_we,
  input  rscl_pkg::pe_mode_e    pe_ctrl,
  input  logic                  sel_en,
  input  logic [LW-1:0]         parent [L],
  input  logic [D-1:0]          grp,
  input  logic [N-1:0]          info_q,
  output int                    checks,
  output int                    failures,
  output logic                  finished
);
  import tb_rscl_ref_pkg::*;

  int n_f, n_g, n_zf, n_fork, n_drop, n_empty, n_tie_frames;

  always @(posedge clk) if (rst_n) begin
    if (pe_we && pe_ctrl == rscl_pkg::PE_F) n_f++;
    if (pe_we && pe_ctrl == rscl_pkg::PE_G) n_g++;
    if (sel_en) begin
      bit used [L];
      used = '{default: 0};
      if (~info_q[grp*(2**K) +: 2**K] != '0) n_zf++;
      for (int a = 0; a < L; a++) begin
        used[parent[a]] = 1;
        for (int b = a + 1; b < L; b++) if (parent[a] == parent[b]) begin n_fork++; break; end
      end
      for (int a = 0; a < L; a++) if (!used[a]) n_drop++;
      if (list_valid != '1) n_empty++;
    end
  end

  initial begin
    uv_t info, u, ref_u, hw_u;
    llv_t c0, c1;
    int ref_m, hw_m, cyc;
    bit tie;
    real sig [3] = '{0.6, 0.8, 1.0};
    checks = 0; failures = 0; finished = 0;
    n_f = 0; n_g = 0; n_zf = 0; n_fork = 0; n_drop = 0; n_empty = 0; n_tie_frames = 0;
    start = 0;
    ch_ll = '{default: '0};
    info_mask = '0;
    info_set(N, N / 2, 0.5, info);
    wait (rst_n);
    for (int fr = 0; fr < FRAMES; fr++) begin
      real sigma;
      sigma = (fr == 0) ? 0.3 : sig[(fr - 1) % 3];
      make_frame(N, info, sigma, (fr == 0) ? 0.05 : SCALE, 2**(QCH-1) - 1, u, c0, c1);
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        ch_ll[i][0] = QCH'(c0[i]);
        ch_ll[i][1] = QCH'(c1[i]);
        info_mask[i] = info[i];
      end
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 0;
      while (!done) begin
        if (busy) cyc++;
        @(negedge clk);
        if (cyc > 4 * N) break;
      end
      checks++;
      if (cyc != N * 4 / (2**K) - 2) begin
        failures++;
        $display("N=%0d K=%0d: latency %0d, expected %0d", N, K, cyc, N * 4 / (2**K) - 2);
      end
      hw_u = '{default: 0};
      for (int i = 0; i < N; i++) hw_u[i] = u_hat[i];
      hw_m = int'(best_metric);
      for (int i = 0; i < N; i++) if (!info[i]) begin
        checks++;
        if (hw_u[i]) failures++;
      end
      checks++;
      if (path_metric(c0, c1, hw_u, N, K) != hw_m) begin
        failures++;
        $display("N=%0d K=%0d frame %0d: metric of u_hat %0d, reported %0d", N, K, fr,
                 path_metric(c0, c1, hw_u, N, K), hw_m);
      end
      decode(c0, c1, info, N, K, L, ref_m, ref_u, tie);
      if (tie) n_tie_frames++;
      else begin
        checks++;
        if (ref_m != hw_m) begin
          failures++;
          $display("N=%0d K=%0d frame %0d: best metric %0d, reference %0d", N, K, fr, hw_m, ref_m);
        end
      end
      if (fr == 0) begin
        checks++;
        if (hw_u != u) begin
          failures++;
          $display("N=%0d K=%0d: noiseless frame not decoded", N, K);
        end
      end
    end
    $display("N=%0d K=%0d L=%0d: f=%0d g=%0d zero-forced groups=%0d forks=%0d dropped=%0d empty-slot steps=%0d boundary-tie frames=%0d",
             N, K, L, n_f, n_g, n_zf, n_fork, n_drop, n_empty, n_tie_frames);
    checks += 6;
    if (n_f == 0) failures++;
    if (n_g == 0) failures++;
    if (n_zf == 0) failures++;
    if (n_fork == 0) failures++;
    if (n_drop == 0) failures++;
    if (n_empty == 0) failures++;
    finished = 1;
  end
endmodule
