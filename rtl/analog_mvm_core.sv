// analog_mvm_core: behavioural model of the analog half of the solver, the
// 32 x 32 1T1R resistive-memory crossbar together with its read chain (input
// DAC, trans-impedance amplifiers with ReLU, output ADC). It is a model of an
// analog macro, not logic to be synthesized into the digital part.
//
// What it models
//   * Array: ROWS x COLS cells, each an integer conductance code in uS.
//     Cells can be written directly through the prog_* port (the value is
//     taken as is), or with SET/RESET pulses through the pulse_* port, which
//     is what the write-verify controller uses (see below).
//   * Input: one DAC register per row holding a signed 16-bit code; the code
//     stands for a read voltage proportional to it (full scale = +-0.1 V in
//     the source system). Rows not driven for a layer are cleared to 0 V.
//   * MVM: by Ohm's and Kirchhoff's laws each output line collects
//     sum_i G[i][j] * V[i]. The column REF_COL is a reference line; the TIA of
//     column j amplifies the difference between its current and the reference
//     current, which makes signed weights G[i][j] - G[i][REF_COL] out of
//     positive conductances. The reference column is this design's way of
//     doing the "inverse mapping" of currents before the ReLU in the TIA.
//   * TIA with ReLU (relu_en), then a 14-bit ADC with saturation. The ADC
//     code of column j is sat14(((sum_i (G[i][j]-G[i][REF]) * V[i]) >>> WFRAC)
//     >>> ADC_DROP), i.e. the Q8.8 result with its ADC_DROP lowest bits lost.
//
//   * Device programming pulses (used by write_verify_ctrl): a SET pulse on
//     one cell with word-line code wl moves the cell towards the level
//     g_set(wl) = wl * 5 / 12 uS (wl counts 2 mV steps above 0.90 V, so the
//     0.90..1.38 V set range maps to 0..100 uS, linear as measured on the real
//     devices) plus a device-to-device spread of -4..+3 uS; a SET never lowers
//     a cell. A RESET pulse lowers the cell by 6..9 uS (floor 2 uS). The
//     spread comes from a 16-bit LFSR, so runs are repeatable. verify_g
//     returns the conductance of one cell (a single-cell read for verify).
//     These numbers are a coarse device model chosen for this design.
//
// Timing: read_start samples the DAC registers; adc_valid pulses READ_CYCLES
// clocks later with all column codes. The default of 2 cycles stands for the
// ~17 ns read path quoted for the source system (10 ns read pulse, 6.1 ns
// MUX decoder, 0.8 ns ADC) at a 100 MHz digital clock, which is an
// assumption of this design.
module analog_mvm_core
  import anf_pkg::*;
#(
  parameter int ROWS        = 32,
  parameter int COLS        = 32,
  parameter int REF_COL     = COLS - 1,
  parameter int READ_CYCLES = 2,
  parameter int G_INIT      = 50
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // cell programming
  input  logic                     prog_en,
  input  logic [$clog2(ROWS)-1:0]  prog_row,
  input  logic [$clog2(COLS)-1:0]  prog_col,
  input  gcode_t                   prog_g,
  // device programming pulses and single-cell verify read
  input  logic                     pulse_set,
  input  logic                     pulse_reset,
  input  logic [$clog2(ROWS)-1:0]  pulse_row,
  input  logic [$clog2(COLS)-1:0]  pulse_col,
  input  logic [7:0]               pulse_wl,
  input  logic [$clog2(ROWS)-1:0]  verify_row,
  input  logic [$clog2(COLS)-1:0]  verify_col,
  output gcode_t                   verify_g,
  // DAC row registers
  input  logic                     dac_clr,
  input  logic                     dac_we,
  input  logic [$clog2(ROWS)-1:0]  dac_row,
  input  data_t                    dac_code,
  // read
  input  logic                     read_start,
  input  logic                     relu_en,
  output logic                     adc_valid,
  output adc_t                     adc_code [COLS]
);

  gcode_t g   [ROWS][COLS];
  data_t  v   [ROWS];
  adc_t   res [COLS];
  int unsigned cnt;
  logic [15:0] lfsr;
  int          gset, gnew;

  assign verify_g = g[verify_row][verify_col];

  // Level reached by a SET pulse, and by a RESET pulse, on the pulsed cell.
  always_comb begin
    gset = (int'(pulse_wl) * 5) / 12 + int'(lfsr[2:0]) - 4;
    if (gset < 0)   gset = 0;
    if (gset > 127) gset = 127;
    if (pulse_set) gnew = (gset > int'(g[pulse_row][pulse_col])) ? gset : int'(g[pulse_row][pulse_col]);
    else begin
      gnew = int'(g[pulse_row][pulse_col]) - 6 - int'(lfsr[1:0]);
      if (gnew < 2) gnew = 2;
    end
  end

  // Column read-out of the current DAC state.
  function automatic adc_t column_code(input int c, input logic relu);
    longint acc;
    longint d;
    acc = 0;
    for (int r = 0; r < ROWS; r++)
      acc += (longint'(g[r][c]) - longint'(g[r][REF_COL])) * longint'(v[r]);
    d = acc >>> WFRAC;
    if (relu && d < 0) d = 0;
    d = d >>> ADC_DROP;
    if (d > longint'(2**(ADC_BITS-1) - 1)) d = 2**(ADC_BITS-1) - 1;
    if (d < -longint'(2**(ADC_BITS-1)))    d = -(2**(ADC_BITS-1));
    return adc_t'(d);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) g[r][c] <= gcode_t'(G_INIT);
    end else if (prog_en) begin
      g[prog_row][prog_col] <= prog_g;
    end else if (pulse_set || pulse_reset) begin
      g[pulse_row][pulse_col] <= gcode_t'(gnew);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) lfsr <= 16'hACE1;
    else if (pulse_set || pulse_reset)
      lfsr <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++) v[r] <= '0;
    end else if (dac_clr) begin
      for (int r = 0; r < ROWS; r++) v[r] <= '0;
    end else if (dac_we) begin
      v[dac_row] <= dac_code;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= 0;
      adc_valid <= 1'b0;
      for (int c = 0; c < COLS; c++) res[c] <= '0;
    end else begin
      adc_valid <= 1'b0;
      if (read_start) begin
        cnt       <= READ_CYCLES - 1;
        adc_valid <= (READ_CYCLES == 1);
        for (int c = 0; c < COLS; c++) res[c] <= column_code(c, relu_en);
      end else if (cnt != 0) begin
        cnt <= cnt - 1;
        if (cnt == 1) adc_valid <= 1'b1;
      end
    end
  end

  always_comb
    for (int c = 0; c < COLS; c++) adc_code[c] = res[c];

endmodule
