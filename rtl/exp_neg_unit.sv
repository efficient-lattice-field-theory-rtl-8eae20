// exp_neg_unit: combinational e^(-s) for the coupling update, Q8.8 in and out.
//
// The coupling layer scales the transformed half of the field by e^(-s2).
// This unit computes it as a power of two: u = -s * log2(e) (log2(e) as the
// Q4.12 constant 5909), split into an integer part n = floor(u) and a fraction
// f in [0, 1). 2^f comes from a 17-entry table of 2^(k/16) in Q2.14
// (entry k = round(16384 * 2^(k/16))) with linear interpolation on the low 4
// bits of f; the result is then shifted by n and rounded down to Q8.8.
// Results above the Q8.8 range saturate to 0x7fff; very small ones go to 0.
// Worst-case relative error is about 0.2 % plus one Q8.8 LSB.
// The method is this design's choice; the source gives only the formula.
module exp_neg_unit
  import anf_pkg::*;
(
  input  data_t s,
  output data_t e
);

  localparam logic [15:0] LUT [17] = '{
    16'd16384, 16'd17109, 16'd17867, 16'd18658, 16'd19484, 16'd20347,
    16'd21247, 16'd22188, 16'd23170, 16'd24196, 16'd25268, 16'd26386,
    16'd27554, 16'd28774, 16'd30048, 16'd31379, 16'd32768};

  logic signed [31:0] u_full;
  logic signed [23:0] u;        // Q.8
  logic signed [15:0] n;
  logic [7:0]         f;
  logic [16:0]        m;        // Q2.14 mantissa in [1, 2)
  logic [16:0]        lo, hi;
  logic [31:0]        scaled;

  always_comb begin
    u_full = -(32'(s) * 32'sd5909);
    u      = 24'(u_full >>> 12);
    n      = 16'(u >>> 8);
    f      = u[7:0];
    lo     = 17'(LUT[5'(f[7:4])]);
    hi     = 17'(LUT[5'(f[7:4]) + 5'd1]);
    m      = lo + 17'(((hi - lo) * 17'(f[3:0])) >> 4);
    scaled = '0;
    if (n >= 16'sd7) begin
      e = 16'sh7fff;
    end else if (n < -16'sd15) begin
      e = '0;
    end else begin
      if (n >= 0) scaled = 32'(m) << n;
      else        scaled = 32'(m) >> (-n);
      e = sat16(40'(scaled >> 6));
    end
  end

endmodule
