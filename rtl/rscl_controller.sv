// rscl_controller: schedule of the 2^K-bit reformulated SCL decoder.
//
// A codeword is decoded as n/2^K groups of 2^K bits. Group 0 runs f at
// stages 1 .. m-K; group i > 0 runs one g at stage m-K-t, where t is the
// number of trailing zeros of i, then f at the stages below it down to m-K.
// Each stage takes one cycle (ST_PE). Every group then takes two more
// cycles: ST_MC (MCU/ZFU and the first half of the pipelined sorting) and
// ST_SORT (second half of the sorting; sel_en applies the pruning to the LL
// bank, the partial sums and the survival paths). The f/g cycles add up to
// 2(n/2^K - 1), the group cycles to 2n/2^K, so busy is high for
// n/2^(K-2) - 2 cycles: 2n-2 for K = 1 and n-2 for K = 2, the latencies the
// paper gives. These follow the paper; the rule for the g stage is the usual
// SC order, and the handshake (start in idle, one-cycle done) is this
// design's own.
//
// first pulses with the accepted start (load channel values, reset list).
module rscl_controller #(
  parameter int unsigned M = 10,
  parameter int unsigned K = 2,
  localparam int unsigned D = M - K
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  output logic               first,
  output logic               busy,
  output logic               done,
  output logic               pe_we,
  output logic [7:0]         stage,
  output rscl_pkg::pe_mode_e pe_ctrl,
  output logic               sel_en,
  output logic [D-1:0]       grp,
  output rscl_pkg::state_e   state
);
  import rscl_pkg::*;

  logic [D-1:0] grp_nx;
  logic [7:0]   tz;

  // trailing zeros of the next group index (the stage of its g operation)
  always_comb begin
    grp_nx = grp + 1'b1;
    tz     = 8'(D - 1);
    for (int b = D - 1; b >= 0; b--)
      if (grp_nx[b]) tz = 8'(b);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= ST_IDLE;
      stage   <= '0;
      pe_ctrl <= PE_F;
      grp     <= '0;
    end else begin
      unique case (state)
        ST_IDLE: if (start) begin
          state   <= ST_PE;
          stage   <= 8'd1;
          pe_ctrl <= PE_F;
          grp     <= '0;
        end
        ST_PE: begin
          if (stage == 8'(D)) state <= ST_MC;
          else begin
            stage   <= stage + 8'd1;
            pe_ctrl <= PE_F;
          end
        end
        ST_MC: state <= ST_SORT;
        ST_SORT: begin
          if (grp == '1) state <= ST_DONE;
          else begin
            state   <= ST_PE;
            grp     <= grp_nx;
            stage   <= 8'(D) - tz;
            pe_ctrl <= PE_G;
          end
        end
        ST_DONE: state <= ST_IDLE;
        default: state <= ST_IDLE;
      endcase
    end
  end

  assign first  = (state == ST_IDLE) && start;
  assign busy   = (state == ST_PE) || (state == ST_MC) || (state == ST_SORT);
  assign done   = (state == ST_DONE);
  assign pe_we  = (state == ST_PE);
  assign sel_en = (state == ST_SORT);
endmodule
