// tb_metric_sort_block: 8-input 4-output and 32-input 16-output sorting
// blocks; the outputs must be the largest half of the inputs (compared as
// sorted key lists, with tags taken from the inputs).
module tb_metric_sort_block;
  localparam int KW = 13, W = 18;
  logic [W-1:0] d8 [8], o8 [4], d32 [32], o32 [16];
  int checks = 0, failures = 0;

  metric_sort_block #(.NI(8),  .W(W), .KW(KW)) dut8  (.din(d8),  .dout(o8));
  metric_sort_block #(.NI(32), .W(W), .KW(KW)) dut32 (.din(d32), .dout(o32));

  function automatic int key(logic [W-1:0] e); return int'($signed(e[W-1 -: KW])); endfunction

  task automatic check_half(input int n, input logic [W-1:0] din [], input logic [W-1:0] dout []);
    int ki [$], ko [$];
    for (int i = 0; i < n; i++) ki.push_back(key(din[i]));
    for (int i = 0; i < n/2; i++) ko.push_back(key(dout[i]));
    tb_util_pkg::sort_desc(ki); tb_util_pkg::sort_desc(ko);
    for (int i = 0; i < n/2; i++) begin
      checks++;
      if (ki[i] != ko[i]) begin failures++; if (failures < 4) $display("n=%0d i=%0d ki=%0d ko=%0d sizes %0d %0d", n, i, ki[i], ko[i], ki.size(), ko.size()); end
    end
    for (int i = 0; i < n/2; i++) begin
      int t;
      t = int'(dout[i][4:0]);
      checks++;
      if (t >= n || din[t] != dout[i]) failures++;
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 500; n++) begin
      logic [W-1:0] a8 [], a32 [], b4 [], b16 [];
      a8 = new[8]; a32 = new[32]; b4 = new[4]; b16 = new[16];
      for (int i = 0; i < 8; i++)  d8[i]  = {KW'($signed($urandom_range(0, 30)) - 15), 5'(i)};
      for (int i = 0; i < 32; i++) d32[i] = {KW'($signed($urandom_range(0, 3000)) - 1500), 5'(i)};
      #1;
      for (int i = 0; i < 8; i++)  a8[i] = d8[i];
      for (int i = 0; i < 32; i++) a32[i] = d32[i];
      for (int i = 0; i < 4; i++)  b4[i] = o8[i];
      for (int i = 0; i < 16; i++) b16[i] = o32[i];
      check_half(8, a8, b4);
      check_half(32, a32, b16);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
