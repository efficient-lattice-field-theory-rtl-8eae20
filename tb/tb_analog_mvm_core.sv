// tb_analog_mvm_core: self-checking test of the crossbar model.
// Programs random conductances (20..80 uS, the programming window) into a
// block of cells, drives random DAC codes, and compares every column's ADC
// code with an independently computed reference: the weighted sum of
// (G - G_ref) * V, scaled to Q8.8, optional ReLU, 14-bit quantization and
// saturation. Also checks that unprogrammed (reference-valued) cells give 0,
// that the result arrives exactly READ_CYCLES clocks after read_start, and
// that dac_clr zeroes the inputs. Finally checks the device-pulse port:
// a SET lands within the model's spread around wl*5/12 uS and never lowers a
// cell, a RESET lowers it by 6..9 uS, and verify_g reads back the cell.
module tb_analog_mvm_core;
  import anf_pkg::*;
  localparam int ROWS = 32, COLS = 32, RC = 2;
  logic clk = 0, rst_n = 0;
  logic prog_en = 0; logic [4:0] prog_row = 0, prog_col = 0; gcode_t prog_g = 0;
  logic dac_clr = 0, dac_we = 0; logic [4:0] dac_row = 0; data_t dac_code = 0;
  logic read_start = 0, relu_en = 0, adc_valid;
  adc_t adc_code [COLS];
  logic pulse_set = 0, pulse_reset = 0; logic [4:0] pulse_row = 0, pulse_col = 0;
  logic [7:0] pulse_wl = 0; logic [4:0] verify_row = 0, verify_col = 0; gcode_t verify_g;
  int checks = 0, failures = 0;
  int gm [ROWS][COLS];
  int vm [ROWS];
  int sat_hits = 0;

  analog_mvm_core #(.READ_CYCLES(RC)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_code(int c, bit relu);
    longint acc = 0; longint d;
    for (int r = 0; r < ROWS; r++) acc += longint'(gm[r][c] - gm[r][COLS-1]) * vm[r];
    // floor division by 2^4 then by 2^2 (arithmetic shift = floor)
    d = acc / 16; if (acc < 0 && acc % 16 != 0) d -= 1;
    if (relu && d < 0) d = 0;
    if (d >= 0) d = d / 4; else d = -((-d + 3) / 4);
    if (d > 8191) begin d = 8191; sat_hits++; end
    if (d < -8192) begin d = -8192; sat_hits++; end
    return int'(d);
  endfunction

  task automatic prog(int r, int c, int g);
    @(negedge clk); prog_en = 1; prog_row = 5'(r); prog_col = 5'(c); prog_g = gcode_t'(g);
    @(negedge clk); prog_en = 0; gm[r][c] = g;
  endtask

  task automatic drive(int r, int val);
    @(negedge clk); dac_we = 1; dac_row = 5'(r); dac_code = data_t'(val);
    @(negedge clk); dac_we = 0; vm[r] = val;
  endtask

  task automatic read_check(bit relu);
    int lat = 0;
    @(negedge clk); read_start = 1; relu_en = relu;
    @(negedge clk); read_start = 0;
    lat = 1;
    while (!adc_valid) begin @(negedge clk); lat++; end
    checks++;
    if (lat != RC) begin failures++; $display("latency %0d != %0d", lat, RC); end
    for (int c = 0; c < COLS; c++) begin
      checks++;
      if (int'(adc_code[c]) != ref_code(c, relu)) begin
        failures++;
        $display("col %0d: got %0d exp %0d", c, adc_code[c], ref_code(c, relu));
      end
    end
  endtask

  initial begin
    for (int r = 0; r < ROWS; r++) begin vm[r] = 0; for (int c = 0; c < COLS; c++) gm[r][c] = 50; end
    repeat (3) @(posedge clk); rst_n = 1;
    // all cells at the reference value: every output is 0
    for (int r = 0; r < 8; r++) drive(r, int'($urandom_range(0, 2000)) - 1000);
    read_check(0);
    // random weights in rows 0..11, columns 0..15
    for (int r = 0; r < 12; r++)
      for (int c = 0; c < 16; c++) prog(r, c, int'($urandom_range(20, 80)));
    for (int trial = 0; trial < 6; trial++) begin
      for (int r = 0; r < 12; r++) drive(r, int'($urandom_range(0, 1024)) - 512);
      read_check(trial[0]);
    end
    // large inputs: drive the ADC into saturation
    for (int r = 0; r < 12; r++) prog(r, 0, 80);
    for (int r = 0; r < 12; r++) prog(r, 1, 20);
    for (int r = 0; r < 12; r++) drive(r, 30000);
    read_check(0);
    read_check(1);
    checks++;
    if (sat_hits == 0) begin failures++; $display("saturation never exercised"); end
    // clear inputs: all outputs 0
    @(negedge clk); dac_clr = 1; @(negedge clk); dac_clr = 0;
    for (int r = 0; r < ROWS; r++) vm[r] = 0;
    read_check(0);
    // device pulses on cells outside the block used above
    for (int k = 0; k < 40; k++) begin
      int r, c, wl, g0, g1, lvl;
      r = 16 + (k % 16); c = 18 + (k % 12); wl = int'($urandom_range(48, 240));
      prog(r, c, 20);
      verify_row = 5'(r); verify_col = 5'(c);
      @(negedge clk); g0 = int'(verify_g);
      checks++;
      if (g0 != 20) begin failures++; $display("verify read %0d != 20", g0); end
      @(negedge clk); pulse_set = 1; pulse_row = 5'(r); pulse_col = 5'(c); pulse_wl = 8'(wl);
      @(negedge clk); pulse_set = 0; g1 = int'(verify_g);
      lvl = (wl * 5) / 12;
      checks++;
      if (g1 < lvl - 4 || g1 > lvl + 3 || g1 < g0) begin
        failures++; $display("SET wl=%0d: %0d -> %0d", wl, g0, g1);
      end
      // a weaker SET must not lower the cell
      g0 = g1;
      @(negedge clk); pulse_set = 1; pulse_wl = 8'(24);
      @(negedge clk); pulse_set = 0; g1 = int'(verify_g);
      checks++;
      if (g1 != g0) begin failures++; $display("weak SET changed %0d -> %0d", g0, g1); end
      @(negedge clk); pulse_reset = 1;
      @(negedge clk); pulse_reset = 0; g1 = int'(verify_g);
      checks++;
      if (g0 - g1 < 6 || g0 - g1 > 9) begin
        failures++; $display("RESET: %0d -> %0d", g0, g1);
      end
      gm[r][c] = g1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
