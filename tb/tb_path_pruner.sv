// tb_path_pruner: 32 candidates -> 2 survivors (4b-rSCL, L = 2) and
// 16 -> 4 (2b-rSCL, L = 4). New candidates every cycle; the survivors must
// be the largest keys of the candidates given one cycle earlier.
module tb_path_pruner;
  localparam int KW = 13, W = 19;
  logic clk = 0, rst_n = 0;
  logic [W-1:0] da [32], oa [2], db [16], ob [4];
  logic [W-1:0] pa [32], pb [16];
  int checks = 0, failures = 0;

  path_pruner #(.NC(32), .L(2), .W(W), .KW(KW)) dut_a (.clk, .rst_n, .din(da), .dout(oa));
  path_pruner #(.NC(16), .L(4), .W(W), .KW(KW)) dut_b (.clk, .rst_n, .din(db), .dout(ob));

  always #5 clk = ~clk;

  function automatic int key(logic [W-1:0] e); return int'($signed(e[W-1 -: KW])); endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    da = '{default: '0}; db = '{default: '0};
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      for (int i = 0; i < 32; i++) da[i] = {KW'($signed($urandom_range(0, 200)) - 100), 6'(i)};
      for (int i = 0; i < 16; i++) db[i] = {KW'($signed($urandom_range(0, 200)) - 100), 6'(i)};
      pa = da; pb = db;
      @(negedge clk);   // one pipeline cycle later
      begin : chk
        automatic int ka [$], kb [$], oka [$], okb [$];
        foreach (pa[i]) ka.push_back(key(pa[i]));
        foreach (pb[i]) kb.push_back(key(pb[i]));
        foreach (oa[i]) begin oka.push_back(key(oa[i])); checks++; if (pa[oa[i][5:0]] != oa[i]) failures++; end
        foreach (ob[i]) begin okb.push_back(key(ob[i])); checks++; if (pb[ob[i][5:0]] != ob[i]) failures++; end
        tb_util_pkg::sort_desc(ka); tb_util_pkg::sort_desc(kb); tb_util_pkg::sort_desc(oka); tb_util_pkg::sort_desc(okb);
        for (int i = 0; i < 2; i++) begin checks++; if (ka[i] != oka[i]) failures++; end
        for (int i = 0; i < 4; i++) begin checks++; if (kb[i] != okb[i]) failures++; end
        // tags must be distinct
        for (int i = 0; i < 4; i++) for (int j = i + 1; j < 4; j++) begin
          checks++; if (ob[i][5:0] == ob[j][5:0]) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
