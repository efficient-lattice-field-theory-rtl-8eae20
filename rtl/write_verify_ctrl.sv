// write_verify_ctrl: closed-loop programming of one crossbar cell to a
// target conductance.
//
// Resistive cells do not land on a conductance reliably in a single pulse,
// so weights are written by repeated pulse-and-verify cycles until the cell
// reads within +-TOL uS of the target (real arrays reach a +-3.5 uS window
// for over 95 % of cells, typically within 20-30 cycles).
// How it works: each cycle first reads the cell (verify_g). If it is inside
// the window the cell is done (ok = 1). If it is too low, a SET pulse is
// applied with a word-line code taken from the linear set characteristic,
// wl = target * WL_NUM / WL_DEN, plus a boost that grows by WL_STEP on every
// further SET so that a cell that did not move enough is driven harder. If
// it is too high, a RESET pulse lowers it and the boost restarts. After
// MAX_CYCLES pulses without success the cell is given up (ok = 0).
//
// Interface: start with row, col, target is taken while idle; the pulse_*
// outputs go to the array; done pulses for one clock with ok and the number
// of pulses used (cycles). Timing: one pulse every two clocks (pulse, then
// verify), so done comes 2 * cycles + 2 clocks after start.
// The window and the pulse budget follow the published measurements; the
// SET/RESET decision rule, the boost and the linear start value are this
// design's choices.
module write_verify_ctrl
  import anf_pkg::*;
#(
  parameter int ROWS       = 32,
  parameter int COLS       = 32,
  parameter int TOL        = 3,
  parameter int MAX_CYCLES = 30,
  parameter int WL_NUM     = 12,
  parameter int WL_DEN     = 5,
  parameter int WL_STEP    = 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [$clog2(ROWS)-1:0]  row,
  input  logic [$clog2(COLS)-1:0]  col,
  input  gcode_t                   target,
  output logic                     busy,
  output logic                     done,
  output logic                     ok,
  output logic [7:0]               cycles,
  // array side
  output logic                     pulse_set,
  output logic                     pulse_reset,
  output logic [$clog2(ROWS)-1:0]  pulse_row,
  output logic [$clog2(COLS)-1:0]  pulse_col,
  output logic [7:0]               pulse_wl,
  output logic [$clog2(ROWS)-1:0]  verify_row,
  output logic [$clog2(COLS)-1:0]  verify_col,
  input  gcode_t                   verify_g
);

  typedef enum logic [1:0] {W_IDLE, W_VERIFY, W_PULSE} wstate_t;

  wstate_t st;
  logic [$clog2(ROWS)-1:0] row_q;
  logic [$clog2(COLS)-1:0] col_q;
  gcode_t  tgt_q;
  int      boost, wl_base, wl;
  logic    too_low, too_high, set_q;

  always_comb begin
    too_low  = int'(verify_g) < int'(tgt_q) - TOL;
    too_high = int'(verify_g) > int'(tgt_q) + TOL;
    wl_base  = (int'(tgt_q) * WL_NUM) / WL_DEN;
    wl       = wl_base + boost;
    if (wl > 255) wl = 255;
    verify_row  = row_q;
    verify_col  = col_q;
    pulse_row   = row_q;
    pulse_col   = col_q;
    pulse_wl    = 8'(wl);
    pulse_set   = (st == W_PULSE) && set_q;
    pulse_reset = (st == W_PULSE) && !set_q;
    busy        = (st != W_IDLE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= W_IDLE; row_q <= '0; col_q <= '0; tgt_q <= '0; boost <= 0;
      set_q <= 1'b0; done <= 1'b0; ok <= 1'b0; cycles <= '0;
    end else begin
      done <= 1'b0;
      case (st)
        W_IDLE: if (start) begin
          row_q <= row; col_q <= col; tgt_q <= target;
          boost <= 0; cycles <= '0; ok <= 1'b0;
          st <= W_VERIFY;
        end
        W_VERIFY: begin
          if (!too_low && !too_high) begin
            ok <= 1'b1; done <= 1'b1; st <= W_IDLE;
          end else if (cycles == 8'(MAX_CYCLES)) begin
            ok <= 1'b0; done <= 1'b1; st <= W_IDLE;
          end else begin
            set_q <= too_low;
            st    <= W_PULSE;
          end
        end
        W_PULSE: begin
          cycles <= cycles + 1'b1;
          if (set_q) boost <= boost + WL_STEP;
          else       boost <= 0;
          st <= W_VERIFY;
        end
        default: st <= W_IDLE;
      endcase
    end
  end

endmodule
