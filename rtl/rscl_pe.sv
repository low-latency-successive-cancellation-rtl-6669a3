// rscl_pe: processing element of an SC component decoder (one f unit and one
// g unit sharing their adders), in the max-log log-likelihood domain.
//
//   f:  c(0) = max(a(0)+b(0), a(1)+b(1))      c(1) = max(a(0)+b(1), a(1)+b(0))
//   g:  d(0) = a(usum)+b(0)                   d(1) = a(1-usum)+b(1)
//
// Four adders form a0+b0, a1+b1, a0+b1 and a1+b0. Two compare-and-select
// (C&S) units give the f outputs; two muxes steered by usum give the g
// outputs; ctrl picks f (0) or g (1). The Jacobian correction term of max*
// is dropped, as the paper does. Purely combinational.
//
// Values are signed two's complement of QM bits. The caller keeps the
// inputs small enough that a sum cannot overflow (each tree stage adds one
// bit). The f/g equations and the shared-adder structure follow the paper;
// the signed format and the ctrl encoding are this design's choices.
module rscl_pe #(
  parameter int unsigned QM = 13
) (
  input  logic signed [QM-1:0] a0,
  input  logic signed [QM-1:0] a1,
  input  logic signed [QM-1:0] b0,
  input  logic signed [QM-1:0] b1,
  input  logic                 usum,
  input  rscl_pkg::pe_mode_e   ctrl,
  output logic signed [QM-1:0] o0,
  output logic signed [QM-1:0] o1
);
  logic signed [QM-1:0] s00, s11, s01, s10;
  logic signed [QM-1:0] c0, c1, d0, d1;

  always_comb begin
    s00 = a0 + b0;
    s11 = a1 + b1;
    s01 = a0 + b1;
    s10 = a1 + b0;
    c0  = (s00 >= s11) ? s00 : s11;     // C&S
    c1  = (s01 >= s10) ? s01 : s10;     // C&S
    d0  = usum ? s10 : s00;             // a(usum)   + b(0)
    d1  = usum ? s01 : s11;             // a(1-usum) + b(1)
    o0  = (ctrl == rscl_pkg::PE_G) ? d0 : c0;
    o1  = (ctrl == rscl_pkg::PE_G) ? d1 : c1;
  end
endmodule
