// tb_coupling_update: self-checking test of the inverse-coupling sample update.
// The feature buffer is modelled here as an array answering the unit's two
// read ports. For several timesteps the test fills it with random s1, s2 in
// patch order, runs the update and checks, per site: frozen sites
// (checkerboard parity equal to the step parity selects M = t mod 2) keep
// their value exactly; others equal (x - s1) * exp(-s2) computed in real
// arithmetic, within the tolerance of the table-based exponential. It also
// checks the exact log-Jacobian sum over two steps, acc_clr, the update time
// of L*L + 1 cycles, and saturation when e^(-s2) is large (the factor is
// clipped to the largest Q8.8 value, then the product is saturated).
module tb_coupling_update;
  import anf_pkg::*;
  localparam int L = 4, P = 2, NS = 8, V = L * L;
  logic clk = 0, rst_n = 0;
  logic x_we = 0; logic [3:0] x_waddr = 0, x_raddr = 0; data_t x_wdata = 0, x_rdata;
  logic acc_clr = 0, start = 0, busy, done;
  logic [2:0] step = 0; baddr_t out_base = 0;
  baddr_t s1_addr, s2_addr; data_t s1, s2;
  logic signed [31:0] logdet;
  int bufm [256];
  int xs [V];
  int checks = 0, failures = 0, sat_seen = 0;
  longint ld_ref;

  coupling_update #(.L(L), .P(P), .NSTEPS(NS)) dut (.*);
  assign s1 = data_t'(bufm[s1_addr]);
  assign s2 = data_t'(bufm[s2_addr]);
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // own version of the site order: patch-major, P x P patches
  function automatic int paddr(int i, int j);
    return ((i / P) * (L / P) + (j / P)) * P * P + (i % P) * P + (j % P);
  endfunction

  task automatic run_step(int t, int base, int s2amp);
    int cyc; int old [V];
    for (int k = 0; k < V; k++) begin
      bufm[base + 2 * paddr(k / L, k % L)]     = int'($urandom_range(0, 2048)) - 1024;
      bufm[base + 2 * paddr(k / L, k % L) + 1] = int'($urandom_range(0, 2 * s2amp)) - s2amp;
    end
    old = xs;
    @(negedge clk); start = 1; step = 3'(t); out_base = baddr_t'(base);
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != V + 1) begin failures++; $display("update took %0d cycles", cyc); end
    for (int k = 0; k < V; k++) begin
      int i = k / L, j = k % L;
      bit frozen = ((i + j) % 2 == 0) ? (t % 2 == 1) : (t % 2 == 0);
      int got;
      x_raddr = 4'(k); #1; got = int'(x_rdata);
      checks++;
      if (frozen) begin
        if (got != old[k]) begin failures++; $display("frozen site %0d changed", k); end
      end else begin
        real sv1 = bufm[base + 2 * paddr(i, j)] / 256.0;
        real sv2 = bufm[base + 2 * paddr(i, j) + 1] / 256.0;
        real diff = old[k] / 256.0 - sv1;
        real ev = $exp(-sv2) > 32767.0 / 256.0 ? 32767.0 / 256.0 : $exp(-sv2);
        real r = diff * ev * 256.0;
        real tol = 0.004 * (r < 0 ? -r : r) + (diff < 0 ? -diff : diff) * 2.0 + 2.0;
        if (r > 32767.0) begin r = 32767.0; sat_seen++; end
        if (r < -32768.0) begin r = -32768.0; sat_seen++; end
        if ((got - r) > tol || (r - got) > tol) begin
          failures++; $display("t=%0d site %0d got %0d exp %f", t, k, got, r);
        end
        ld_ref += bufm[base + 2 * paddr(i, j) + 1];
      end
      xs[k] = got;
    end
    checks++;
    if (longint'(logdet) != ld_ref) begin failures++; $display("logdet %0d exp %0d", logdet, ld_ref); end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      for (int k = 0; k < V; k++) begin
        @(negedge clk); x_we = 1; x_waddr = 4'(k);
        xs[k] = int'($urandom_range(0, 2048)) - 1024; x_wdata = data_t'(xs[k]);
      end
      @(negedge clk); x_we = 0; acc_clr = 1; @(negedge clk); acc_clr = 0;
      ld_ref = 0;
      checks++;
      if (logdet != 0) begin failures++; $display("acc_clr failed"); end
      for (int t = 0; t < 4; t++) run_step(t, 16 + 40 * rep, 600);
    end
    // large negative s2: e^(-s2) beyond the Q8.8 range, outputs saturate
    run_step(0, 100, 2560);
    run_step(1, 100, 2560);
    checks++;
    if (sat_seen == 0) begin failures++; $display("saturation never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
