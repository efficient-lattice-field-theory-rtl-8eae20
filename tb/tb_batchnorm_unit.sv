// tb_batchnorm_unit: self-checking test of the inference batch normalization.
// Checks the identity after reset, then random (gamma, beta) entries:
// y = sat(floor(x * gamma / 256) + beta), pass-through when disabled, and
// saturation.
module tb_batchnorm_unit;
  import anf_pkg::*;
  localparam int D = 64;
  logic clk = 0, rst_n = 0, we = 0, en = 0;
  logic [5:0] waddr = 0, idx = 0;
  data_t wgamma = 0, wbeta = 0, x_in = 0, y_out;
  int g [D], b [D];
  int checks = 0, failures = 0;

  batchnorm_unit #(.DEPTH(D)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int expect_y(int xv, int gg, int bb);
    longint p = longint'(xv) * gg;
    longint q = p / 256;
    if (p < 0 && p % 256 != 0) q -= 1;
    q += bb;
    return q > 32767 ? 32767 : (q < -32768 ? -32768 : int'(q));
  endfunction

  task automatic check_one(int xv, logic e, int k);
    @(negedge clk); x_in = data_t'(xv); en = e; idx = 6'(k); #1;
    checks++;
    if (int'(y_out) != (e ? expect_y(xv, g[k], b[k]) : xv)) begin
      failures++; $display("x=%0d k=%0d got %0d", xv, k, y_out);
    end
  endtask

  initial begin
    for (int k = 0; k < D; k++) begin g[k] = 256; b[k] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 20; n++) check_one(int'($urandom_range(0, 60000)) - 30000, 1, n);
    for (int k = 0; k < D; k++) begin
      @(negedge clk); we = 1; waddr = 6'(k);
      g[k] = int'($urandom_range(0, 1024)) - 512; b[k] = int'($urandom_range(0, 2000)) - 1000;
      wgamma = data_t'(g[k]); wbeta = data_t'(b[k]);
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 300; n++)
      check_one(int'($urandom_range(0, 20000)) - 10000, n % 4 != 0, int'($urandom_range(0, D-1)));
    // saturation: gamma 2.0 on a large input
    @(negedge clk); we = 1; waddr = 0; wgamma = 512; wbeta = 0; g[0] = 512; b[0] = 0;
    @(negedge clk); we = 0;
    check_one(30000, 1, 0);
    check_one(-30000, 1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
