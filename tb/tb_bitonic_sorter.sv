// tb_bitonic_sorter: 8-element increasing and decreasing bitonic sorters on
// random keys with unique tags; checks the order and that the outputs are a
// permutation of the inputs.
module tb_bitonic_sorter;
  localparam int NI = 8, KW = 13, W = 16;
  logic [W-1:0] din [NI], up [NI], dn [NI];
  int checks = 0, failures = 0;

  bitonic_sorter #(.NI(NI), .W(W), .KW(KW), .DESCEND(1'b0)) dut_up (.din(din), .dout(up));
  bitonic_sorter #(.NI(NI), .W(W), .KW(KW), .DESCEND(1'b1)) dut_dn (.din(din), .dout(dn));

  function automatic int key(logic [W-1:0] e); return int'($signed(e[W-1 -: KW])); endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 1000; n++) begin
      for (int i = 0; i < NI; i++)
        din[i] = {KW'($signed($urandom_range(0, 40)) - 20), 3'(i)};
      #1;
      for (int i = 0; i + 1 < NI; i++) begin
        checks += 2;
        if (key(up[i]) > key(up[i+1])) failures++;
        if (key(dn[i]) < key(dn[i+1])) failures++;
      end
      for (int i = 0; i < NI; i++) begin
        // element with tag i must appear unchanged exactly once in each output
        int cu, cd;
        cu = 0; cd = 0;
        for (int j = 0; j < NI; j++) begin
          if (up[j] == din[i]) cu++;
          if (dn[j] == din[i]) cd++;
        end
        checks += 2;
        if (cu != 1) failures++;
        if (cd != 1) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
