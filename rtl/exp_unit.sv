// exp_unit: table-assisted exponential e^x for the STDP plasticity rule.
//
// Implements the published range-reduction method in fixed point:
//   N = floor(x / (ln2/2^K)),  r = x - N*ln2/2^K       (0 <= r < ln2/2^K)
//   N = M*2^K + d,  M = floor(N/2^K),  d = N mod 2^K
//   e^x = 2^M * LUT(d) * e^r,  LUT(d) = 2^(d/2^K),  e^r ~ 1 + r
// The unit is split around the ROM fetch: the reduce half turns x into the
// table offset d, the shift M and the remainder r; the event controller
// fetches LUT(d) from the PE's ROM; the reconstruct half multiplies by
// (1 + r) and applies 2^M as a right shift.
//
// Formats (this design's choice): x signed Q8.8 and x <= 0 (STDP uses
// x = -dt/tau), LUT(d) unsigned Q1.15, r unsigned Q0.16, e unsigned Q1.15.
// The published text takes N = floor(...) and also states |r| <= ln2/2^(K+1),
// which needs rounding instead; this unit follows the floor definition.
// Both halves are combinational.
module exp_unit
  import spare_pkg::*;
#(
  parameter int K = EXP_K
) (
  // reduce
  input  logic signed [15:0] x,
  output logic [K-1:0]       d,
  output logic [7:0]         rsh,     // -M, right-shift amount
  output logic [15:0]        r,
  // reconstruct
  input  logic [15:0]        lut_val,
  input  logic [7:0]         rsh_in,
  input  logic [15:0]        r_in,
  output logic [15:0]        e
);

  logic signed [31:0] prod;
  logic signed [31:0] n;
  logic signed [31:0] m;
  logic signed [31:0] rem;
  logic [32:0]        scaled;
  logic [16:0]        e_full;

  always_comb begin
    prod = 32'(x) * EXP_INV_LN2;         // Q.16
    n    = prod >>> 16;                  // floor
    rem  = (32'(x) <<< 8) - n * EXP_LN2_K;
    if (rem < 0)            r = '0;
    else if (rem > 32'hFFFF) r = 16'hFFFF;
    else                    r = rem[15:0];
    d    = n[K-1:0];
    m    = n >>> K;
    if (m > 0)              rsh = '0;
    else if (m < -255)      rsh = 8'd255;
    else                    rsh = 8'(-m);
  end

  always_comb begin
    scaled = 33'(lut_val) * (33'(17'h10000) + 33'(r_in));
    e_full = scaled[32:16];
    e_full = (rsh_in > 8'd16) ? '0 : (e_full >> rsh_in);
    e      = (e_full > 17'hFFFF) ? 16'hFFFF : e_full[15:0];
  end

endmodule
