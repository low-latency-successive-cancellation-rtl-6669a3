// rscl_pkg: types, default sizes and small bit-level helpers shared by the
// reformulated successive-cancellation list (rSCL) decoder.
//
// The defaults describe the main configuration: a (1024, 512) polar code,
// 4-bit decision (K = 2), list size 2 and 3-bit channel log-likelihoods.
// Stage s of the f/g tree carries values of Q_ch + s bits; metrics, the
// multi-bit metric unit and the sorter use Q_ch + m bits.
//
// polar_enc() is the natural-order polar transform x = u * F^{(x)k} with
// F = [1 0; 1 1]; bit p of a vector is position p+1 in the paper's notation
// (bit 0 is u_{first}). It is used for the partial sums and by the metric
// computation unit; it is its own inverse.
package rscl_pkg;

  localparam int unsigned N_DEFAULT   = 1024;
  localparam int unsigned K_DEFAULT   = 2;
  localparam int unsigned L_DEFAULT   = 2;
  localparam int unsigned QCH_DEFAULT = 3;

  // Controller states.
  typedef enum logic [2:0] {
    ST_IDLE  = 3'd0,  // waiting for start
    ST_PE    = 3'd2,  // one f or g stage of the SC component decoders
    ST_MC    = 3'd3,  // MCU/ZFU and first half of the sorting block
    ST_SORT  = 3'd4,  // second half of the sorting block, paths pruned
    ST_DONE  = 3'd5   // result valid, one cycle
  } state_e;

  // PE function select (Fig. 16 "ctrl").
  typedef enum logic {
    PE_F = 1'b0,
    PE_G = 1'b1
  } pe_mode_e;

  // Natural-order polar transform of the low 2^k bits of u (k <= 5).
  function automatic logic [31:0] polar_enc(input logic [31:0] u, input int unsigned k);
    logic [31:0] v;
    v = u;
    for (int unsigned lvl = 0; lvl < 5; lvl++) begin
      if (lvl < k) begin
        for (int unsigned p = 0; p < 32; p++) begin
          // pair (p, p + 2^lvl) inside a block of 2^(lvl+1)
          if (((p >> lvl) & 1) == 0 && (p + (1 << lvl)) < (1 << k))
            v[p] = v[p] ^ v[p + (1 << lvl)];
        end
      end
    end
    return v;
  endfunction

  // Bit-reverse the low w bits of c (w <= 32).
  function automatic logic [31:0] rev_bits(input logic [31:0] c, input int unsigned w);
    logic [31:0] r;
    r = '0;
    for (int unsigned p = 0; p < 32; p++)
      if (p < w) r[p] = c[w - 1 - p];
    return r;
  endfunction

endpackage
