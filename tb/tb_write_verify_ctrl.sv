// tb_write_verify_ctrl: self-checking test of closed-loop cell programming.
// The controller drives the crossbar model's pulse port. Cells start at
// random conductances and are programmed to targets across the 20..80 uS
// window (and a few outside it). For every cell the test checks that the
// controller reports success, that the cell then reads within +-TOL of the
// target, that the reported pulse count equals the number of SET/RESET
// pulses seen on the array, that start-to-done takes 2 clocks per pulse
// plus 2, and that no more than MAX_CYCLES were used. An
// unreachable target (beyond the strongest SET level) must end with ok = 0
// after exactly MAX_CYCLES pulses. A bystander cell elsewhere in the array
// must be left untouched.
module tb_write_verify_ctrl;
  import anf_pkg::*;
  localparam int TOL = 3, MAXC = 30;
  logic clk = 0, rst_n = 0;
  logic prog_en = 0; logic [4:0] prog_row = 0, prog_col = 0; gcode_t prog_g = 0;
  logic pulse_set, pulse_reset; logic [4:0] pulse_row, pulse_col; logic [7:0] pulse_wl;
  logic [4:0] verify_row, verify_col; gcode_t verify_g;
  logic dac_clr = 0, dac_we = 0; logic [4:0] dac_row = 0; data_t dac_code = 0;
  logic read_start = 0, relu_en = 0, adc_valid;
  adc_t adc_code [32];
  logic start = 0; logic [4:0] row = 0, col = 0; gcode_t target = 0;
  logic busy, done, ok; logic [7:0] cycles;
  int checks = 0, failures = 0, npulse = 0, total = 0, maxused = 0;

  analog_mvm_core xbar (.*);
  write_verify_ctrl #(.TOL(TOL), .MAX_CYCLES(MAXC)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && (pulse_set || pulse_reset)) npulse++;

  task automatic prog(int r, int c, int g);
    @(negedge clk); prog_en = 1; prog_row = 5'(r); prog_col = 5'(c); prog_g = gcode_t'(g);
    @(negedge clk); prog_en = 0;
  endtask

  task automatic write_cell(int r, int c, int t, bit expect_ok);
    int g, n0, lat;
    n0 = npulse;
    @(negedge clk); start = 1; row = 5'(r); col = 5'(c); target = gcode_t'(t);
    @(negedge clk); start = 0; lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    g = int'(xbar.g[r][c]);
    checks++;
    if (ok !== expect_ok) begin failures++; $display("cell %0d,%0d t=%0d ok=%0b", r, c, t, ok); end
    checks++;
    if (int'(cycles) != npulse - n0) begin
      failures++; $display("cycles %0d but %0d pulses", cycles, npulse - n0);
    end
    // timing: start, one verify per pulse plus the final one, two clocks per pulse
    checks++;
    if (lat != 2 * int'(cycles) + 2) begin failures++; $display("latency %0d for %0d pulses", lat, cycles); end
    checks++;
    if (int'(cycles) > MAXC) begin failures++; $display("cycles %0d > %0d", cycles, MAXC); end
    if (expect_ok) begin
      checks++;
      if (g < t - TOL || g > t + TOL) begin failures++; $display("cell %0d,%0d t=%0d got %0d", r, c, t, g); end
      total += int'(cycles);
      if (int'(cycles) > maxused) maxused = int'(cycles);
    end else begin
      checks++;
      if (int'(cycles) != MAXC) begin failures++; $display("give-up after %0d", cycles); end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    prog(31, 31, 77);
    for (int k = 0; k < 120; k++) begin
      int r, c, t;
      r = k % 30; c = (k * 7) % 30;
      prog(r, c, int'($urandom_range(5, 110)));
      t = (k < 100) ? 20 + (k % 61) : int'($urandom_range(8, 100));
      write_cell(r, c, t, 1'b1);
    end
    // target beyond the strongest SET level (255 * 5 / 12 + 3 = 109 uS)
    prog(3, 4, 60);
    write_cell(3, 4, 125, 1'b0);
    checks++;
    if (int'(xbar.g[31][31]) != 77) begin failures++; $display("bystander cell changed"); end
    checks++;
    if (busy) begin failures++; $display("busy after done"); end
    $display("mean pulses %0d/120, max %0d", total, maxused);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
