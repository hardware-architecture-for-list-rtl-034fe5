// lsc_pe: one processing element of an SC decoder core.
//
// Likelihoods are negative log-likelihoods (LLs): a pair {LL(0), LL(1)} per
// node, both non-negative, smaller is more likely. From the two input pairs
// a (upper branch) and b (lower branch) the PE computes either
//   f: y0 = min(a0+b0, a1+b1),  y1 = min(a1+b0, a0+b1)
//   g: y0 = a[us]+b0,           y1 = a[!us]+b1
// where us is the partial sum of the node. The f function drops the
// correction term of min* (the max-log approximation), as the reference
// design does. The LLs of stage s need Q_ch+logN-s bits, so with W = Q_max =
// Q_ch+logN and inputs of at most W-1 significant bits no sum can overflow
// and no saturation logic is needed. Purely combinational.
module lsc_pe
  import lsc_pkg::*;
#(
  parameter int unsigned W = 13   // Q_max = Q_ch + log2(N)
) (
  input  pe_func_e             func,
  input  logic                 us,   // partial sum (used by g)
  input  logic [1:0][W-1:0]    a,    // {LL(1), LL(0)} of the upper input
  input  logic [1:0][W-1:0]    b,    // {LL(1), LL(0)} of the lower input
  output logic [1:0][W-1:0]    y
);

  logic [W-1:0] s00, s11, s10, s01;

  always_comb begin
    s00 = a[0] + b[0];
    s11 = a[1] + b[1];
    s10 = a[1] + b[0];
    s01 = a[0] + b[1];
    if (func == PE_F) begin
      y[0] = (s00 <= s11) ? s00 : s11;
      y[1] = (s10 <= s01) ? s10 : s01;
    end else begin
      y[0] = us ? s10 : s00;
      y[1] = us ? s01 : s11;
    end
  end

endmodule
