// coupling_update: digital sample update of one inverse coupling layer and
// the log-Jacobian accumulator that runs over all iteration steps.
//
// The flow keeps the field x (an L x L lattice, Q8.8, row-major) here. At
// timestep t a checkerboard mask M^t splits it: sites with M = 1 form the
// frozen half x_a, which is the network input, and the others form x_b.
//   M[i][j] = (t mod 2) if (i + j) is even, else 1 - (t mod 2)
// After the network has produced s1 and s2 for every site, this unit
// rewrites each non-frozen site as
//   x' = (x - s1) * e^(-s2)        (frozen sites keep their value)
// and adds s2 of every rewritten site to a 32-bit log-Jacobian accumulator,
// so that after all steps logdet = sum_t sum_k s2 (Q8.8) and the density of
// the generated sample follows as log q = log r(x0) - logdet (the flow's
// q = r * prod_t J_t^-1 with J_t = prod_k e^(s2_k)). The host forms log q.
//
// s1 and s2 are read from the feature buffer, where the network leaves them
// patch by patch (P x P patches): site (i, j) has s1 at
// out_base + 2*patch_addr(i, j) and s2 at the next address. Two read ports
// fetch both in one cycle.
//
// Timing: start (with step and out_base) is taken when idle; one site is
// updated per clock; done pulses L*L + 1 cycles after start. acc_clr clears
// the accumulator (once per sample, before the first step). The x_* port
// loads the prior sample and reads the field; it must not write while busy.
// The subtract / exponential multiply / accumulate order follows the
// source's coupling equations; number formats and the one-site-per-cycle
// schedule are this design's choices.
module coupling_update
  import anf_pkg::*;
#(
  parameter int L      = 4,
  parameter int P      = 2,
  parameter int NSTEPS = 8
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // field memory access
  input  logic                        x_we,
  input  logic [$clog2(L*L)-1:0]      x_waddr,
  input  data_t                       x_wdata,
  input  logic [$clog2(L*L)-1:0]      x_raddr,
  output data_t                       x_rdata,
  // update control
  input  logic                        acc_clr,
  input  logic                        start,
  input  logic [$clog2(NSTEPS)-1:0]   step,
  input  baddr_t                      out_base,
  output logic                        busy,
  output logic                        done,
  // feature-buffer read ports (s1, s2)
  output baddr_t                      s1_addr,
  output baddr_t                      s2_addr,
  input  data_t                       s1,
  input  data_t                       s2,
  output logic signed [31:0]          logdet
);

  localparam int V  = L * L;
  localparam int VW = $clog2(V);

  data_t                   xm [V];
  logic                    run;
  logic [VW-1:0]           k;
  logic [$clog2(NSTEPS)-1:0] step_q;
  baddr_t                  base_q;
  int unsigned             si, sj;
  logic                    frozen;
  data_t                   e, xnew;
  logic signed [31:0]      diff, prod;

  exp_neg_unit u_exp (.s(s2), .e(e));

  assign x_rdata = xm[x_raddr];
  assign busy    = run;

  always_comb begin
    si      = int'(k) / L;
    sj      = int'(k) % L;
    frozen  = mask_bit(int'(step_q), si, sj);
    s1_addr = base_q + baddr_t'(2 * patch_addr(si, sj, L, P));
    s2_addr = s1_addr + 1'b1;
    diff    = 32'(xm[k]) - 32'(s1);
    prod    = diff * 32'(e);
    xnew    = sat16(40'(prod >>> FRAC));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int q = 0; q < V; q++) xm[q] <= '0;
      run <= 1'b0; k <= '0; step_q <= '0; base_q <= '0;
      done <= 1'b0; logdet <= '0;
    end else begin
      done <= 1'b0;
      if (acc_clr) logdet <= '0;
      if (!run) begin
        if (x_we) xm[x_waddr] <= x_wdata;
        if (start) begin
          run <= 1'b1; k <= '0; step_q <= step; base_q <= out_base;
        end
      end else begin
        if (!frozen) begin
          xm[k]  <= xnew;
          logdet <= logdet + 32'(s2);
        end
        if (k == VW'(V - 1)) begin
          run  <= 1'b0;
          done <= 1'b1;
        end else begin
          k <= k + 1'b1;
        end
      end
    end
  end

endmodule
