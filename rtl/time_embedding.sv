// time_embedding: digital time-embedding stage of the mixer blocks.
//
// The flow applies the same coupling network at every timestep t; what tells
// the steps apart is a learned embedding vector that is added to the input of
// each mixer block (the "X + t" term before batch normalization). This module
// holds those vectors in a table of NSTEPS x TEMB_LEN Q8.8 entries, written by
// the host through the w* port, and adds entry [step][chan] to the incoming
// value with saturation when en is set (x_out = x_in otherwise).
//
// Timing: the table write takes effect at the next clock edge; the addition
// is combinational. The table size, the per-channel indexing (one value per
// channel, shared by all tokens) and the host-written table are choices of
// this design; the source only says that the embedding is handled digitally.
module time_embedding
  import anf_pkg::*;
#(
  parameter int NSTEPS   = 8,
  parameter int TEMB_LEN = 32
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         we,
  input  logic [$clog2(NSTEPS)-1:0]    wstep,
  input  logic [$clog2(TEMB_LEN)-1:0]  wchan,
  input  data_t                        wdata,
  input  logic                         en,
  input  logic [$clog2(NSTEPS)-1:0]    step,
  input  logic [$clog2(TEMB_LEN)-1:0]  chan,
  input  data_t                        x_in,
  output data_t                        x_out
);

  data_t table_q [NSTEPS][TEMB_LEN];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < NSTEPS; s++)
        for (int c = 0; c < TEMB_LEN; c++) table_q[s][c] <= '0;
    end else if (we) begin
      table_q[wstep][wchan] <= wdata;
    end
  end

  always_comb begin
    if (en) x_out = sat16(40'(x_in) + 40'(table_q[step][chan]));
    else    x_out = x_in;
  end

endmodule
