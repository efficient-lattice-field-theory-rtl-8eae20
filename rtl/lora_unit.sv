// lora_unit: digital low-rank adaptation (LoRA) branch of a network layer.
//
// Fine-tuning the flow to new lattice-action parameters changes only small
// LoRA matrices that sit in parallel with the frozen base weights held in the
// crossbar: for an input vector x (length in_len) the branch computes
// h = A x (A is RANK x in_len) and y = B h (B is out_len x RANK), and y is
// added to the base layer output. A and B of every layer live in one weight
// memory of DEPTH Q8.8 words written by the host; a layer's block starts at
// base and holds A row-major, then B row-major:
//   A[r][i] at base + r*in_len + i,   B[j][r] at base + RANK*in_len + j*RANK + r.
//
// How it works: one multiply-accumulate unit with a 32-bit accumulator walks
// first through A (RANK dot products of length in_len, each rounded down and
// saturated to Q8.8 into h) and then through B (out_len dot products of
// length RANK into y).
// Timing: start is sampled when idle; done pulses for one cycle
// RANK*in_len + out_len*RANK + 1 cycles later, when y[0..out_len-1] is valid.
// y holds its value until the next start. x must stay stable while busy.
// The sequential single-MAC structure, the rank and the memory layout are
// choices of this design; the source gives the A/B structure and the addition
// to the base output.
module lora_unit
  import anf_pkg::*;
#(
  parameter int RANK  = 2,
  parameter int DEPTH = 512,
  parameter int VLEN  = VLEN_MAX
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      we,
  input  logic [$clog2(DEPTH)-1:0]  waddr,
  input  data_t                     wdata,
  input  logic                      start,
  input  logic [$clog2(DEPTH)-1:0]  base,
  input  logic [5:0]                in_len,
  input  logic [5:0]                out_len,
  input  data_t                     x [VLEN],
  output logic                      busy,
  output logic                      done,
  output data_t                     y [VLEN]
);

  typedef enum logic [1:0] {L_IDLE, L_A, L_B} lstate_t;

  localparam int AW = $clog2(DEPTH);

  data_t             wmem [DEPTH];
  data_t             h    [RANK];
  lstate_t           st;
  logic [5:0]        k;      // element index (A phase) / output index (B phase)
  logic [$clog2(RANK+1)-1:0] r;
  logic signed [31:0] acc, acc_nx;
  logic [AW-1:0]     base_q;
  logic [5:0]        in_len_q, out_len_q;
  logic [AW-1:0]     addr;
  data_t             opnd;

  always_ff @(posedge clk) begin
    if (we) wmem[waddr] <= wdata;
  end

  always_comb begin
    if (st == L_A) begin
      addr = base_q + AW'(r) * AW'(in_len_q) + AW'(k);
      opnd = x[k[$clog2(VLEN)-1:0]];
    end else begin
      addr = base_q + AW'(RANK) * AW'(in_len_q) + AW'(k) * AW'(RANK) + AW'(r);
      opnd = h[r[$clog2(RANK)-1+(RANK==1):0]];
    end
    acc_nx = acc + 32'(wmem[addr]) * 32'(opnd);
  end

  assign busy = (st != L_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= L_IDLE; k <= '0; r <= '0; acc <= '0; done <= 1'b0;
      base_q <= '0; in_len_q <= '0; out_len_q <= '0;
      for (int q = 0; q < RANK; q++) h[q] <= '0;
      for (int q = 0; q < VLEN; q++) y[q] <= '0;
    end else begin
      done <= 1'b0;
      case (st)
        L_IDLE: if (start) begin
          base_q <= base; in_len_q <= in_len; out_len_q <= out_len;
          k <= '0; r <= '0; acc <= '0;
          st <= L_A;
        end
        L_A: begin
          if (k == in_len_q - 1) begin
            h[r[$clog2(RANK)-1+(RANK==1):0]] <= sat16(40'(acc_nx >>> FRAC));
            acc <= '0;
            k   <= '0;
            if (r == $bits(r)'(RANK - 1)) begin
              r <= '0; st <= L_B;
            end else begin
              r <= r + 1'b1;
            end
          end else begin
            acc <= acc_nx;
            k   <= k + 1'b1;
          end
        end
        L_B: begin
          if (r == $bits(r)'(RANK - 1)) begin
            y[k[$clog2(VLEN)-1:0]] <= sat16(40'(acc_nx >>> FRAC));
            acc <= '0;
            r   <= '0;
            if (k == out_len_q - 1) begin
              st <= L_IDLE; done <= 1'b1;
            end else begin
              k <= k + 1'b1;
            end
          end else begin
            acc <= acc_nx;
            r   <= r + 1'b1;
          end
        end
        default: st <= L_IDLE;
      endcase
    end
  end

endmodule
