// batchnorm_unit: digital inference-time batch normalization.
//
// At inference a batch-normalization layer is a per-channel affine map,
// y = gamma * x + beta, with the running mean and variance already folded
// into gamma and beta. This unit stores DEPTH (gamma, beta) pairs in Q8.8,
// written by the host, and applies entry idx to x_in when en is set
// (y_out = x_in otherwise): y = sat16(((x * gamma) >>> 8) + beta).
// Each layer owns a block of entries starting at its descriptor's bn_base.
//
// Timing: parameter writes take effect at the next clock edge; the datapath
// is combinational (one multiplier, one adder). Folding the statistics and
// the Q8.8 format are choices of this design; the source places batch
// normalization in the digital part but gives no arithmetic detail.
// After reset every entry is the identity (gamma = 1.0, beta = 0).
module batchnorm_unit
  import anf_pkg::*;
#(
  parameter int DEPTH = 64
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      we,
  input  logic [$clog2(DEPTH)-1:0]  waddr,
  input  data_t                     wgamma,
  input  data_t                     wbeta,
  input  logic                      en,
  input  logic [$clog2(DEPTH)-1:0]  idx,
  input  data_t                     x_in,
  output data_t                     y_out
);

  data_t gamma_q [DEPTH];
  data_t beta_q  [DEPTH];
  logic signed [31:0] prod;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < DEPTH; k++) begin
        gamma_q[k] <= data_t'(1 << FRAC);
        beta_q[k]  <= '0;
      end
    end else if (we) begin
      gamma_q[waddr] <= wgamma;
      beta_q[waddr]  <= wbeta;
    end
  end

  always_comb begin
    prod = 32'(x_in) * 32'(gamma_q[idx]);
    if (en) y_out = sat16(40'(prod >>> FRAC) + 40'(beta_q[idx]));
    else    y_out = x_in;
  end

endmodule
