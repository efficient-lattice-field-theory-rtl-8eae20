// tb_time_embedding: self-checking test of the time-embedding adder.
// Fills the table with random values, then checks x_out = sat(x_in + t[step][chan])
// for random inputs, x_out = x_in when disabled, and saturation at both ends.
module tb_time_embedding;
  import anf_pkg::*;
  localparam int NS = 8, TL = 32;
  logic clk = 0, rst_n = 0, we = 0, en = 0;
  logic [2:0] wstep = 0, step = 0; logic [4:0] wchan = 0, chan = 0;
  data_t wdata = 0, x_in = 0, x_out;
  int tab [NS][TL];
  int checks = 0, failures = 0;

  time_embedding #(.NSTEPS(NS), .TEMB_LEN(TL)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int clip(int v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : v);
  endfunction

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int s = 0; s < NS; s++)
      for (int c = 0; c < TL; c++) begin
        @(negedge clk); we = 1; wstep = 3'(s); wchan = 5'(c);
        tab[s][c] = int'($urandom_range(0, 4000)) - 2000;
        if (s == 7 && c == 31) tab[s][c] = 32000;
        if (s == 7 && c == 30) tab[s][c] = -32000;
        wdata = data_t'(tab[s][c]);
      end
    @(negedge clk); we = 0;
    for (int n = 0; n < 300; n++) begin
      int xv;
      @(negedge clk);
      step = 3'($urandom_range(0, NS-1)); chan = 5'($urandom_range(0, TL-1));
      en = n % 5 != 0;
      xv = int'($urandom_range(0, 20000)) - 10000;
      if (n % 17 == 0) begin step = 7; chan = 31; xv = 5000; end
      if (n % 19 == 0) begin step = 7; chan = 30; xv = -5000; end
      x_in = data_t'(xv);
      #1;
      checks++;
      if (int'(x_out) != (en ? clip(xv + tab[step][chan]) : xv)) begin
        failures++; $display("n=%0d got %0d", n, x_out);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
