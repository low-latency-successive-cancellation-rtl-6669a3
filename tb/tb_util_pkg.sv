// tb_util_pkg: small helpers shared by the testbenches.
package tb_util_pkg;
  // Sort an int queue into decreasing order (signed comparison).
  function automatic void sort_desc(ref int q [$]);
    for (int i = 0; i < q.size(); i++)
      for (int j = i + 1; j < q.size(); j++)
        if (q[j] > q[i]) begin
          int t;
          t = q[i]; q[i] = q[j]; q[j] = t;
        end
  endfunction
endpackage
