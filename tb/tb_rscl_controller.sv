// tb_rscl_controller: m = 5 with K = 2 and K = 1. The (stage, f/g) order of
// the PE cycles must match a recursive walk of the SC tree, each group must
// end with exactly one ST_MC and one ST_SORT cycle, and busy must last
// n/2^(K-2) - 2 cycles (30 for K = 2, 62 for K = 1), followed by one done.
module tb_rscl_controller;
  localparam int M = 5;
  logic clk = 0, rst_n = 0, start;
  int checks = 0, failures = 0;

  logic first2, busy2, done2, pe_we2, sel2, first1, busy1, done1, pe_we1, sel1;
  logic [7:0] stage2, stage1;
  rscl_pkg::pe_mode_e ctrl2, ctrl1;
  logic [2:0] grp2;
  logic [3:0] grp1;
  rscl_pkg::state_e st2, st1;

  rscl_controller #(.M(M), .K(2)) dut2 (.clk, .rst_n, .start, .first(first2), .busy(busy2), .done(done2),
    .pe_we(pe_we2), .stage(stage2), .pe_ctrl(ctrl2), .sel_en(sel2), .grp(grp2), .state(st2));
  rscl_controller #(.M(M), .K(1)) dut1 (.clk, .rst_n, .start, .first(first1), .busy(busy1), .done(done1),
    .pe_we(pe_we1), .stage(stage1), .pe_ctrl(ctrl1), .sel_en(sel1), .grp(grp1), .state(st1));

  always #5 clk = ~clk;

  // expected sequence: for each group: PE ops (stage, g?) then MC, SORT
  int exp2 [$], exp1 [$];   // code: 100*g + stage for PE, -1 for MC, -2 for SORT

  function automatic void build(input int d, ref int q [$]);
    for (int i = 0; i < (1 << d); i++) begin
      if (i == 0) begin
        for (int s = 1; s <= d; s++) q.push_back(s);
      end else begin
        int t;
        t = 0;
        while (((i >> t) & 1) == 0) t++;
        q.push_back(100 + d - t);
        for (int s = d - t + 1; s <= d; s++) q.push_back(s);
      end
      q.push_back(-1);
      q.push_back(-2);
    end
  endfunction

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n2, n1, b2, b1, d2, d1;
    start = 0;
    build(M - 2, exp2);
    build(M - 1, exp1);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 2; rep++) begin
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      n2 = 0; n1 = 0; b2 = 0; b1 = 0; d2 = 0; d1 = 0;
      while (d1 == 0) begin
        int c2, c1;
        if (busy2) begin
          c2 = (st2 == rscl_pkg::ST_PE) ? (ctrl2 == rscl_pkg::PE_G ? 100 : 0) + int'(stage2)
             : (st2 == rscl_pkg::ST_MC) ? -1 : -2;
          checks++;
          if (n2 >= exp2.size() || exp2[n2] != c2) failures++;
          n2++; b2++;
        end
        if (busy1) begin
          c1 = (st1 == rscl_pkg::ST_PE) ? (ctrl1 == rscl_pkg::PE_G ? 100 : 0) + int'(stage1)
             : (st1 == rscl_pkg::ST_MC) ? -1 : -2;
          checks++;
          if (n1 >= exp1.size() || exp1[n1] != c1) failures++;
          n1++; b1++;
        end
        if (done2) d2++;
        if (done1) d1++;
        @(negedge clk);
      end
      checks += 4;
      if (b2 != (1 << M) - 2) failures++;          // n - 2
      if (b1 != 2 * (1 << M) - 2) failures++;      // 2n - 2
      if (d2 != 1) failures++;
      if (d1 != 1) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
