// Complex multiplier with three real multiplications and five real
// additions (Knuth's 3M form), as the paper uses to save DSP slices.
//
// For a = ar + i*ai and b = br + i*bi:
//   k1 = br*(ar+ai), k2 = ar*(bi-br), k3 = ai*(br+bi)
//   re = k1 - k3,    im = k1 + k2
// The products keep full precision (Q.60 for Q2.30 inputs); the caller
// rounds only after its final summation, as the paper describes. The module
// is purely combinational; the splitting of each 32x32 product over DSP
// input ports is left to synthesis.
module cmul3
  import qgd_pkg::*;
#(
  parameter int W = FXW
) (
  input  logic signed [W-1:0]   ar,
  input  logic signed [W-1:0]   ai,
  input  logic signed [W-1:0]   br,
  input  logic signed [W-1:0]   bi,
  output logic signed [2*W+1:0] pr,
  output logic signed [2*W+1:0] pi
);
  logic signed [W:0]     s_a, d_b, s_b;
  logic signed [2*W:0]   k1, k2, k3;

  always_comb begin
    s_a = {ar[W-1], ar} + {ai[W-1], ai};
    d_b = {bi[W-1], bi} - {br[W-1], br};
    s_b = {br[W-1], br} + {bi[W-1], bi};
    k1  = (2*W+1)'(br) * (2*W+1)'(s_a);
    k2  = (2*W+1)'(ar) * (2*W+1)'(d_b);
    k3  = (2*W+1)'(ai) * (2*W+1)'(s_b);
    pr  = (2*W+2)'(k1) - (2*W+2)'(k3);
    pi  = (2*W+2)'(k1) + (2*W+2)'(k2);
  end
endmodule
