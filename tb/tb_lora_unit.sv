// tb_lora_unit: self-checking test of the LoRA branch.
// Loads random A and B blocks for several layer shapes at different base
// addresses, runs the unit on random inputs and compares y with a reference
// computed here (h = sat(floor(A x / 256)), y = sat(floor(B h / 256))).
// Also checks the cycle count from start to done, RANK*in + out*RANK + 1.
module tb_lora_unit;
  import anf_pkg::*;
  localparam int R = 2, D = 512, VL = 32;
  logic clk = 0, rst_n = 0, we = 0, start = 0, busy, done;
  logic [8:0] waddr = 0, base = 0;
  logic [5:0] in_len = 0, out_len = 0;
  data_t wdata = 0;
  data_t x [VL];
  data_t y [VL];
  int wm [D];
  int checks = 0, failures = 0;

  lora_unit #(.RANK(R), .DEPTH(D), .VLEN(VL)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int q8(longint acc);
    longint q = acc / 256;
    if (acc < 0 && acc % 256 != 0) q -= 1;
    return q > 32767 ? 32767 : (q < -32768 ? -32768 : int'(q));
  endfunction

  task automatic run_case(int b, int ni, int no, int amp);
    int h [R]; int cyc;
    for (int k = 0; k < R * ni + no * R; k++) begin
      @(negedge clk); we = 1; waddr = 9'(b + k);
      wm[b + k] = int'($urandom_range(0, 2 * amp)) - amp; wdata = data_t'(wm[b + k]);
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < VL; i++) x[i] = data_t'(int'($urandom_range(0, 2 * amp)) - amp);
    for (int r = 0; r < R; r++) begin
      longint a = 0;
      for (int i = 0; i < ni; i++) a += longint'(wm[b + r * ni + i]) * x[i];
      h[r] = q8(a);
    end
    base = 9'(b); in_len = 6'(ni); out_len = 6'(no);
    start = 1; @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != R * ni + no * R + 1) begin failures++; $display("cycles %0d", cyc); end
    for (int j = 0; j < no; j++) begin
      longint a = 0;
      for (int r = 0; r < R; r++) a += longint'(wm[b + R * ni + j * R + r]) * h[r];
      checks++;
      if (int'(y[j]) != q8(a)) begin failures++; $display("y[%0d]=%0d exp %0d", j, y[j], q8(a)); end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    run_case(0, 8, 8, 400);
    run_case(40, 4, 8, 600);
    run_case(100, 8, 4, 300);
    run_case(200, 32, 31, 200);
    run_case(400, 1, 1, 1000);
    run_case(300, 16, 16, 30000);   // saturating case
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
